// tb_smc_bank_sched: one bank scheduler against a behavioural bank that
// answers LFM requests from a software FM-Index (d = 4). First the
// example of the FM-Index literature used by the paper: reference
// ATCCGTA, read TCC, interval (0,8) -> (7,8). Then many searches on a
// random 400-symbol reference: reads cut from the reference (hits) and
// random reads (mostly misses), of 1..24 symbols, from the full interval
// or from a random one, with random bank stalls. Every final interval is
// compared with a software backward search. Coalesced pairs are checked
// by the bank model.
module tb_smc_bank_sched;
  import finder_pkg::*;
  import tb_fm_pkg::*;
  localparam int D = 4, CTX = 8, QMAX = 32, ID_W = 16, LEN_W = 6;
  logic clk = 0, rst_n = 0;
  logic new_valid = 0, new_ready, new_dir = 0;
  logic [ID_W-1:0] new_id = '0;
  logic [QMAX-1:0][1:0] new_query = '0;
  logic [LEN_W-1:0] new_len = '0;
  logic [POS_W-1:0] new_low = '0, new_high = '0;
  logic bq_valid, bq_ready, res_valid;
  lfm_req_t bq_req;
  lfm_resp_t res;
  logic done_valid, done_ready = 1;
  logic [ID_W-1:0] done_id;
  logic [POS_W-1:0] done_low, done_high;
  logic ev_coalesce, ev_qfull;
  int errors, coalesced, accepted;
  int checks = 0, failures = 0, n_coal = 0, n_qfull = 0;
  int exp_lo [int], exp_hi [int];
  int sent = 0, got = 0;

  always #5 clk = ~clk;

  smc_bank_sched #(.D(D), .CTX(CTX), .QMAX(QMAX), .QDEPTH(4), .ID_W(ID_W)) dut (.*);
  tb_bank_model #(.D(D), .STALLS(1)) u_bank (
    .clk, .rst_n, .req_valid(bq_valid), .req_ready(bq_ready), .req(bq_req),
    .resp_valid(res_valid), .resp(res), .errors, .coalesced, .accepted);

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (ev_coalesce) n_coal++;
    if (ev_qfull) n_qfull++;
  end

  always @(negedge clk) if (rst_n && done_valid && done_ready) begin
    checks++;
    got++;
    if (!exp_lo.exists(int'(done_id)) || done_low != 32'(exp_lo[int'(done_id)]) || done_high != 32'(exp_hi[int'(done_id)])) begin
      failures++;
      $display("FAIL id %0d: (%0d,%0d) expected (%0d,%0d)", done_id, done_low, done_high,
               exp_lo[int'(done_id)], exp_hi[int'(done_id)]);
    end
  end

  task automatic submit(int q[$], int lo, int hi, int dir);
    int elo = lo, ehi = hi;
    g_fm[dir].search(q, elo, ehi);
    exp_lo[sent] = elo;
    exp_hi[sent] = ehi;
    new_valid = 1;
    new_id = ID_W'(sent);
    new_query = '0;
    foreach (q[i]) new_query[i] = 2'(q[i]);
    new_len = LEN_W'(q.size());
    new_low = 32'(lo); new_high = 32'(hi); new_dir = 1'(dir);
    #1;
    while (!new_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    new_valid = 0;
    sent++;
  endtask

  initial begin
    int rf[$], rv[$];
    // paper example
    g_fm[0] = new(D);
    g_fm[0].build('{0, 3, 1, 1, 2, 3, 0});   // ATCCGTA
    g_fm[1] = g_fm[0];
    repeat (2) @(negedge clk);
    rst_n = 1;
    submit('{3, 1, 1}, 0, 8, 0);               // TCC
    while (got < 1) @(negedge clk);
    checks++;
    if (exp_lo[0] != 7 || exp_hi[0] != 8) begin failures++; $display("FAIL reference model on the example"); end
    // random reference and its reverse
    rf.delete();
    for (int i = 0; i < 400; i++) rf.push_back($urandom_range(3));
    rv = rf;
    rv.reverse();
    g_fm[0] = new(D); g_fm[0].build(rf);
    g_fm[1] = new(D); g_fm[1].build(rv);
    for (int k = 0; k < 400; k++) begin
      int q[$], len, dir, lo, hi;
      len = $urandom_range(1, 24);
      dir = $urandom_range(1);
      q.delete();
      if (k % 2 == 0) begin
        int st = $urandom_range(400 - len);
        for (int i = 0; i < len; i++) q.push_back(dir ? rv[st + i] : rf[st + i]);
      end else begin
        for (int i = 0; i < len; i++) q.push_back($urandom_range(3));
      end
      lo = 0; hi = 401;
      if (k % 5 == 4) begin lo = $urandom_range(400); hi = $urandom_range(401); end
      if (k % 50 == 7) q.delete();          // empty read: returned unchanged
      submit(q, lo, hi, dir);
      if (k % 9 == 0) begin
        done_ready = 0;
        repeat ($urandom_range(20)) @(negedge clk);
        done_ready = 1;
      end
    end
    while (got < sent) @(negedge clk);
    checks++;
    if (errors != 0 || n_coal == 0 || n_coal != coalesced || n_qfull == 0) begin
      failures++;
      $display("FAIL coalescing errors=%0d pairs=%0d/%0d qfull=%0d", errors, n_coal, coalesced, n_qfull);
    end
    $display("searches=%0d lfm requests=%0d coalesced pairs=%0d queue-full cycles=%0d", sent, accepted, n_coal, n_qfull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
