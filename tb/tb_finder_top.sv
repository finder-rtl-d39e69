// tb_finder_top: end-to-end run of the whole accelerator at reduced size
// (2 banks, d = 16, 64 buckets per direction, short wear period).
// The FM-Indexes of a random 600-symbol reference and of its reverse are
// built here, loaded into both banks, the LUT adders are programmed, and
// 600 searches (reads cut from the reference and random reads, both
// directions) are run through the host port. Every final interval is
// checked against a software backward search. A worn RHU cell is injected
// half way. The run must make every mechanism happen at least once:
// coalesced low/high pairs and sense-amplifier hits, diagonal-pair
// retirement with its pipeline stall, ECP allocation, a full bank queue,
// counts across the '$' position, borrows between LUT lookups, searches
// ending on an empty interval and searches using all their symbols.
module tb_finder_top;
  import finder_pkg::*;
  import tb_fm_pkg::*;
  localparam int NB = 2, D = 16, FM_AW = 7, CTX = 8, QMAX = 32, ID_W = 16, LEN_W = 6;
  localparam int BW = 2*D + 128, NREF = 600;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] bank_en = '1;
  logic [1:0][POS_W-1:0] dollar_pos;
  logic h_req_valid = 0, h_req_ready, h_req_dir = 0;
  logic [ID_W-1:0] h_req_id = '0;
  logic [QMAX-1:0][1:0] h_req_query = '0;
  logic [LEN_W-1:0] h_req_len = '0;
  logic [POS_W-1:0] h_req_low = '0, h_req_high = '0;
  logic h_resp_valid, h_resp_ready = 1;
  logic [ID_W-1:0] h_resp_id;
  logic [POS_W-1:0] h_resp_low, h_resp_high;
  logic fm_wr_en = 0;
  logic [0:0] fm_wr_bank = '0;
  logic [FM_AW-1:0] fm_wr_addr = '0;
  logic [BW-1:0] fm_wr_data = '0;
  logic lut_prog_en = 0;
  logic [16:0] lut_prog_addr = '0;
  logic [8:0] lut_prog_data = '0;
  logic wearout_valid = 0;
  logic [0:0] wearout_bank = '0;
  logic [1:0] wearout_rhu = '0;
  logic [9:0] wearout_pos = '0;
  logic [NB-1:0][2:0] rhu_dead;
  logic [NB-1:0] bank_hold, ev_coalesce, ev_sa_hit, ev_array_read, ev_swap, ev_ecp, ev_qfull;

  int checks = 0, failures = 0, sent = 0, got = 0;
  int exp_lo [int], exp_hi [int];
  int n_coal = 0, n_hit = 0, n_swap = 0, n_ecp = 0, n_qfull = 0, n_hold = 0;
  int n_dollar = 0, n_borrow = 0, n_empty = 0, n_full = 0, n_dir1 = 0;

  always #5 clk = ~clk;

  finder_top #(.NB(NB), .D(D), .FM_AW(FM_AW), .CTX(CTX), .QMAX(QMAX), .QDEPTH(8),
               .ID_W(ID_W), .WL_PERIOD(400), .BREAK_CYCLES(30)) dut (.*);

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < NB; b++) begin
      n_coal  += int'(ev_coalesce[b]);
      n_hit   += int'(ev_sa_hit[b]);
      n_swap  += int'(ev_swap[b]);
      n_ecp   += int'(ev_ecp[b]);
      n_qfull += int'(ev_qfull[b]);
      n_hold  += int'(bank_hold[b]);
    end
    if (dut.g_bank[0].u_bank.s2_valid && dut.g_bank[0].u_bank.s2_dollar_here) n_dollar++;
    if (dut.g_bank[0].u_bank.u_add.v_q[0] && dut.g_bank[0].u_bank.u_add.cout[0]) n_borrow++;
  end

  always @(negedge clk) if (rst_n && h_resp_valid && h_resp_ready) begin
    int id;
    id = int'(h_resp_id);
    checks++;
    got++;
    if (h_resp_low != 32'(exp_lo[id]) || h_resp_high != 32'(exp_hi[id])) begin
      failures++;
      $display("FAIL id %0d (%0d,%0d) expected (%0d,%0d)", id, h_resp_low, h_resp_high, exp_lo[id], exp_hi[id]);
    end
  end

  task automatic submit(int q[$], int dir);
    int lo = 0, hi = NREF + 1;
    h_req_low = 32'(lo); h_req_high = 32'(hi);
    g_fm[dir].search(q, lo, hi);
    exp_lo[sent] = lo; exp_hi[sent] = hi;
    if (lo >= hi) n_empty++; else n_full++;
    if (dir == 1) n_dir1++;
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
    int rf[$], rv[$];
    for (int i = 0; i < NREF; i++) rf.push_back($urandom_range(3));
    rv = rf; rv.reverse();
    g_fm[0] = new(D); g_fm[0].build(rf);
    g_fm[1] = new(D); g_fm[1].build(rv);
    dollar_pos[0] = 32'(g_fm[0].dollar);
    dollar_pos[1] = 32'(g_fm[1].dollar);
    // LUT adder subtraction table, all adders of all banks at once
    for (int av = 0; av < 256; av++)
      for (int cv = 0; cv < 2; cv++)
        for (int bv = 0; bv < 256; bv++) begin
          int r;
          @(negedge clk);
          r = av - bv - cv;
          lut_prog_en = 1;
          lut_prog_addr = {8'(av), 1'(cv), 8'(bv)};
          lut_prog_data = {r < 0 ? 1'b1 : 1'b0, 8'(r)};
        end
    @(negedge clk) lut_prog_en = 0;
    // both FM-Indexes into both banks
    for (int b = 0; b < NB; b++)
      for (int dir = 0; dir < 2; dir++)
        for (int k = 0; k < g_fm[dir].num_buckets(); k++) begin
          logic [2*512+127:0] w;
          @(negedge clk);
          w = g_fm[dir].bucket(k);
          fm_wr_en = 1; fm_wr_bank = 1'(b);
          fm_wr_addr = {1'(dir), 6'(k)};
          fm_wr_data = w[BW-1:0];
        end
    @(negedge clk) fm_wr_en = 0;
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int k = 0; k < 600; k++) begin
      int q[$], len, dir, st;
      if (k == 300) begin
        // wear out a cell of RHU 2 in bank 0 while the banks are idle
        while (got < sent) @(negedge clk);
        wearout_valid = 1; wearout_bank = 1'b0; wearout_rhu = 2'd2; wearout_pos = 10'd3;
        @(negedge clk) wearout_valid = 0;
        repeat (5) @(negedge clk);
      end
      len = $urandom_range(1, 30);
      dir = $urandom_range(1);
      st = $urandom_range(NREF - len);
      q.delete();
      for (int i = 0; i < len; i++) q.push_back((k % 3 == 0) ? $urandom_range(3) : ((dir != 0) ? rv[st+i] : rf[st+i]));
      submit(q, dir);
    end
    while (got < sent) @(negedge clk);
    $display("searches=%0d empty=%0d matched=%0d reverse=%0d coalesced=%0d sa_hits=%0d swaps=%0d ecp=%0d qfull=%0d hold=%0d dollar=%0d borrow=%0d",
             sent, n_empty, n_full, n_dir1, n_coal, n_hit, n_swap, n_ecp, n_qfull, n_hold, n_dollar, n_borrow);
    begin
      int ev[11];
      ev = '{n_coal, n_hit, n_swap, n_ecp, n_qfull, n_hold, n_dollar, n_borrow, n_empty, n_full, n_dir1};
      foreach (ev[i]) begin
        checks++;
        if (ev[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
