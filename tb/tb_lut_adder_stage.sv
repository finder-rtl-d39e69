// tb_lut_adder_stage: programs the subtraction table, streams one
// (marker, hd) pair per cycle and checks that each result equals
// marker - hd on 32 bits and leaves exactly 4 cycles after it entered.
// Markers with zero low bytes force the borrow through all four lookups.
module tb_lut_adder_stage;
  import finder_pkg::*;
  logic             clk = 0, rst_n = 0;
  logic             prog_en = 0, in_valid = 0;
  logic [16:0]      prog_addr = '0;
  logic [8:0]       prog_data = '0;
  logic [TAG_W-1:0] in_tag = '0;
  logic [MAR_W-1:0] mar = '0;
  logic [7:0]       hd = '0;
  logic             out_valid;
  logic [TAG_W-1:0] out_tag;
  logic [MAR_W-1:0] result;
  int checks = 0, failures = 0, cycle = 0, borrows = 0;
  logic [MAR_W-1:0] exp_q[$];
  int               t_in[$];
  logic [TAG_W-1:0] tag_q[$];

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  lut_adder_stage dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    logic [MAR_W-1:0] e;
    int t;
    e = exp_q.pop_front();
    t = t_in.pop_front();
    checks++;
    if (result !== e || out_tag !== tag_q.pop_front() || cycle - t != 4) begin
      failures++;
      $display("FAIL result %h expected %h latency %0d", result, e, cycle - t);
    end
  end

  initial begin
    for (int av = 0; av < 256; av++)
      for (int cv = 0; cv < 2; cv++)
        for (int bv = 0; bv < 256; bv++) begin
          int r;
          @(negedge clk);
          r = av - bv - cv;
          prog_en = 1;
          prog_addr = {8'(av), 1'(cv), 8'(bv)};
          prog_data = {r < 0 ? 1'b1 : 1'b0, 8'(r)};
        end
    @(negedge clk) begin prog_en = 0; rst_n = 1; end
    for (int k = 0; k < 2000; k++) begin
      logic [MAR_W-1:0] m;
      logic [7:0] h;
      m = $urandom();
      if (k % 5 == 0) m = m & 32'hFFFF_FF00;     // borrow into byte 1
      if (k % 7 == 0) m = m & 32'hFF00_0000;     // borrow through to byte 3
      if (k % 11 == 0) m = 32'h0000_0000;        // wraps
      h = 8'($urandom_range(255));
      if (m[7:0] < h) borrows++;
      @(negedge clk);
      in_valid = (k % 13 != 12);                 // an occasional bubble
      mar = m; hd = h; in_tag = TAG_W'(k);
      if (in_valid) begin
        exp_q.push_back(m - {24'b0, h});
        t_in.push_back(cycle);
        tag_q.push_back(in_tag);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || borrows == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
