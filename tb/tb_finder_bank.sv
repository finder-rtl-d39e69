// tb_finder_bank: one bank pipeline with small buckets (d = 16). The LUT
// adders get the subtraction table, both FM-Index arrays random buckets.
// Random LFM requests are streamed, one per cycle whenever the bank is
// ready, including coalesced low/high pairs in one bucket and requests in
// the bucket of '$'. Each result is compared with
//   marker[sym] - (d - #sym among the first pos mod d symbols, '$' excluded)
// computed here, and must leave 9 cycles after it was accepted. The wear
// period is shortened so that diagonal pairs are retired during the run
// (the bank stalls), and a worn RHU cell is repaired by an ECP pointer.
module tb_finder_bank;
  import finder_pkg::*;
  localparam int D = 16, FM_AW = 8, BW = 2*D + 128, PERIOD = 300, BRK = 40;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  lfm_req_t req;
  logic resp_valid;
  lfm_resp_t resp;
  logic fm_wr_en = 0;
  logic [FM_AW-1:0] fm_wr_addr = '0;
  logic [BW-1:0] fm_wr_data = '0;
  logic lut_prog_en = 0;
  logic [16:0] lut_prog_addr = '0;
  logic [8:0] lut_prog_data = '0;
  logic [1:0][POS_W-1:0] dollar_pos;
  logic wearout_valid = 0;
  logic [1:0] wearout_rhu = '0;
  logic [9:0] wearout_pos = '0;
  logic [2:0] rhu_dead;
  logic ev_array_read, ev_sa_hit, ev_swap, ev_ecp;

  logic [BW-1:0] mem [2**FM_AW];
  int checks = 0, failures = 0, cycle = 0;
  int n_swap = 0, n_ecp = 0, n_hit = 0, n_read = 0, n_stall = 0, n_dollar = 0;
  int exp_v[$], exp_t[$], exp_tag[$];

  always #5 clk = ~clk;

  finder_bank #(.D(D), .FM_AW(FM_AW), .WL_PERIOD(PERIOD), .BREAK_CYCLES(BRK)) dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle++;
    if (ev_swap) n_swap++;
    if (ev_ecp) n_ecp++;
    if (ev_sa_hit) n_hit++;
    if (ev_array_read) n_read++;
    if (rst_n && !req_ready) n_stall++;
  end

  function automatic int expect_lfm(int dir, int pos, int s);
    logic [BW-1:0] b;
    int cnt = 0, off, bk;
    bk  = pos / D;
    off = pos % D;
    b = mem[{1'(dir), 7'(bk)}];
    for (int j = 0; j < off; j++)
      if (!(bk == int'(dollar_pos[dir]) / D && j == int'(dollar_pos[dir]) % D) && int'(b[2*j +: 2]) == s) cnt++;
    return int'(b[2*D + 32*s +: 32]) - (D - cnt);
  endfunction

  // results: compare in order
  always @(negedge clk) if (rst_n && resp_valid) begin
    checks++;
    if (exp_v.size() == 0) begin
      failures++;
      $display("FAIL unexpected result");
    end else begin
      int v, t, g;
      v = exp_v.pop_front(); t = exp_t.pop_front(); g = exp_tag.pop_front();
      if (resp.value != 32'(v) || resp.tag != TAG_W'(g) || cycle - t != 9) begin
        failures++;
        $display("FAIL tag %0d value %0d expected %0d latency %0d", resp.tag, resp.value, v, cycle - t);
      end
    end
  end

  task automatic send(int dir, int pos, int s, bit keep, bit from, int tag);
    req.tag = TAG_W'(tag); req.dir = 1'(dir); req.pos = 32'(pos); req.sym = sym_t'(s);
    req.keep_sa = keep; req.from_sa = from;
    req_valid = 1;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    if (int'(pos) / D == int'(dollar_pos[dir]) / D) n_dollar++;
    exp_v.push_back(expect_lfm(dir, pos, s));
    exp_t.push_back(cycle);
    exp_tag.push_back(tag);
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic traffic(int n);
    for (int k = 0; k < n; k++) begin
      int dir, b, s;
      dir = $urandom_range(1);
      b = $urandom_range(2**(FM_AW-1) - 1);
      s = $urandom_range(3);
      if (k % 4 == 0) b = int'(dollar_pos[dir]) / D;
      if (k % 3 == 0) begin
        // a coalesced pair: low and high in the same bucket
        send(dir, b * D + $urandom_range(D - 1), s, 1, 0, 2*k);
        req_valid = 1;
        send(dir, b * D + $urandom_range(D - 1), s, 0, 1, 2*k + 1);
      end else begin
        send(dir, b * D + $urandom_range(D - 1), s, 0, 0, 2*k);
      end
    end
  endtask

  initial begin
    dollar_pos[0] = 32'(5 * D + 3);
    dollar_pos[1] = 32'(17 * D + 11);
    // LUT adder subtraction table
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
    // random buckets; markers large enough to stay positive
    for (int a = 0; a < 2**FM_AW; a++) begin
      @(negedge clk);
      mem[a] = {$urandom() >> 1, $urandom() >> 1, $urandom() >> 1, $urandom() >> 1, $urandom()};
      for (int s = 0; s < 4; s++) if (mem[a][2*D + 32*s +: 32] < 32'(D)) mem[a][2*D + 32*s +: 32] += 32'(D);
      if (a % 7 == 0) mem[a][2*D + 32*2 +: 32] = 32'h0000_0100 + 32'(D);  // borrow across bytes
      fm_wr_en = 1; fm_wr_addr = FM_AW'(a); fm_wr_data = mem[a];
    end
    @(negedge clk) fm_wr_en = 0;
    rst_n = 1;
    @(negedge clk);
    traffic(600);
    // a cell of RHU 1 wears out; its ECP pointer is set before traffic resumes
    repeat (12) @(negedge clk);
    wearout_valid = 1; wearout_rhu = 2'd1; wearout_pos = 10'd9;
    @(negedge clk) wearout_valid = 0;
    repeat (4) @(negedge clk);
    traffic(600);
    repeat (20) @(negedge clk);
    checks++;
    if (exp_v.size() != 0 || n_swap == 0 || n_ecp != 1 || n_hit == 0 || n_stall == 0 || n_dollar == 0) begin
      failures++;
      $display("FAIL events: left=%0d swap=%0d ecp=%0d hit=%0d stall=%0d dollar=%0d", exp_v.size(), n_swap, n_ecp, n_hit, n_stall, n_dollar);
    end
    $display("events: pair swaps=%0d ecp=%0d sa hits=%0d array reads=%0d stall cycles=%0d", n_swap, n_ecp, n_hit, n_read, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
