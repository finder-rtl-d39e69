// tb_smc: the slave memory controller with two banks replaced by
// behavioural bank models (tb_bank_model). Searches on a random
// reference are submitted back to back; every result is checked against a
// software backward search, every search must come back exactly once,
// both banks must be used while both are enabled, and only bank 0 while
// bank_en = 01.
module tb_smc;
  import finder_pkg::*;
  import tb_fm_pkg::*;
  localparam int NB = 2, D = 8, CTX = 4, QMAX = 32, ID_W = 16, LEN_W = 6;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] bank_en = '1;
  logic h_req_valid = 0, h_req_ready, h_req_dir = 0;
  logic [ID_W-1:0] h_req_id = '0;
  logic [QMAX-1:0][1:0] h_req_query = '0;
  logic [LEN_W-1:0] h_req_len = '0;
  logic [POS_W-1:0] h_req_low = '0, h_req_high = '0;
  logic h_resp_valid, h_resp_ready = 1;
  logic [ID_W-1:0] h_resp_id;
  logic [POS_W-1:0] h_resp_low, h_resp_high;
  logic [NB-1:0] bq_valid, bq_ready, res_valid, ev_coalesce, ev_qfull;
  lfm_req_t [NB-1:0] bq_req;
  lfm_resp_t [NB-1:0] res;
  int errors [NB], coalesced [NB], accepted [NB];
  int checks = 0, failures = 0, sent = 0, got = 0;
  int exp_lo [int], exp_hi [int], seen [int];

  always #5 clk = ~clk;

  smc #(.NB(NB), .D(D), .CTX(CTX), .QMAX(QMAX), .QDEPTH(8), .ID_W(ID_W)) dut (.*);
  for (genvar b = 0; b < NB; b++) begin : g_bm
    tb_bank_model #(.D(D), .STALLS(b == 1)) u_bank (
      .clk, .rst_n, .req_valid(bq_valid[b]), .req_ready(bq_ready[b]), .req(bq_req[b]),
      .resp_valid(res_valid[b]), .resp(res[b]),
      .errors(errors[b]), .coalesced(coalesced[b]), .accepted(accepted[b]));
  end

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && h_resp_valid && h_resp_ready) begin
    int id;
    id = int'(h_resp_id);
    checks++;
    got++;
    if (seen.exists(id) || h_resp_low != 32'(exp_lo[id]) || h_resp_high != 32'(exp_hi[id])) begin
      failures++;
      $display("FAIL id %0d (%0d,%0d) expected (%0d,%0d)", id, h_resp_low, h_resp_high, exp_lo[id], exp_hi[id]);
    end
    seen[id] = 1;
  end

  task automatic submit(int q[$], int dir);
    int lo = 0, hi = g_fm[dir].n + 1;
    h_req_low = 32'(lo); h_req_high = 32'(hi);
    g_fm[dir].search(q, lo, hi);
    exp_lo[sent] = lo; exp_hi[sent] = hi;
    h_req_valid = 1; h_req_id = ID_W'(sent); h_req_dir = 1'(dir);
    h_req_query = '0;
    foreach (q[i]) h_req_query[i] = 2'(q[i]);
    h_req_len = LEN_W'(q.size());
    #1;
    while (!h_req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    h_req_valid = 0;
    sent++;
  endtask

  initial begin
    int rf[$], rv[$], acc0, acc1;
    for (int i = 0; i < 300; i++) rf.push_back($urandom_range(3));
    rv = rf; rv.reverse();
    g_fm[0] = new(D); g_fm[0].build(rf);
    g_fm[1] = new(D); g_fm[1].build(rv);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      int q[$], len, dir, st;
      if (k == 200) begin
        while (got < sent) @(negedge clk);
        bank_en = 2'b01;
        acc0 = accepted[0]; acc1 = accepted[1];
      end
      len = $urandom_range(1, 20);
      dir = $urandom_range(1);
      st = $urandom_range(300 - len);
      q.delete();
      for (int i = 0; i < len; i++) q.push_back((k % 3 == 0) ? $urandom_range(3) : (dir ? rv[st+i] : rf[st+i]));
      submit(q, dir);
      if (k % 17 == 0) begin
        h_resp_ready = 0;
        repeat (15) @(negedge clk);
        h_resp_ready = 1;
      end
    end
    while (got < sent) @(negedge clk);
    checks++;
    if (errors[0] + errors[1] != 0 || acc0 == 0 || acc1 == 0 || accepted[1] != acc1 || accepted[0] == acc0) begin
      failures++;
      $display("FAIL bank use: %0d %0d -> %0d %0d, errors %0d", acc0, acc1, accepted[0], accepted[1], errors[0] + errors[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
