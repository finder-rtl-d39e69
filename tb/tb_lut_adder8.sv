// tb_lut_adder8: programs the subtraction table {Cout,O} = A - B - Cin into
// the LUT array, then checks random lookups and corner cases against the
// same formula computed here, including the one-cycle lookup latency.
module tb_lut_adder8;
  logic        clk = 0;
  logic        prog_en = 0, rd_en = 0, cin = 0;
  logic [16:0] prog_addr = '0;
  logic [8:0]  prog_data = '0;
  logic [7:0]  a = 0, b = 0, o;
  logic        cout;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lut_adder8 dut (.*);

  function automatic logic [8:0] expect_word(int unsigned av, int unsigned bv, int unsigned cv);
    int r;
    r = int'(av) - int'(bv) - int'(cv);
    return {r < 0 ? 1'b1 : 1'b0, 8'(r)};
  endfunction

  task automatic lookup(int unsigned av, int unsigned bv, int unsigned cv);
    @(negedge clk);
    a = 8'(av); b = 8'(bv); cin = cv[0]; rd_en = 1;
    @(negedge clk);
    rd_en = 0;
    a = ~a;  // operands may change after the edge
    checks++;
    if ({cout, o} !== expect_word(av, bv, cv)) begin
      failures++;
      $display("FAIL a=%0d b=%0d cin=%0d got %0d/%0d", av, bv, cv, cout, o);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int av = 0; av < 256; av++)
      for (int cv = 0; cv < 2; cv++)
        for (int bv = 0; bv < 256; bv++) begin
          @(negedge clk);
          prog_en = 1;
          prog_addr = {8'(av), 1'(cv), 8'(bv)};
          prog_data = expect_word(av, bv, cv);
        end
    @(negedge clk) prog_en = 0;
    lookup(0, 0, 0);
    lookup(0, 0, 1);
    lookup(0, 255, 1);
    lookup(255, 255, 0);
    lookup(128, 1, 0);
    lookup(5, 200, 0);
    for (int k = 0; k < 3000; k++) lookup($urandom_range(255), $urandom_range(255), $urandom_range(1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
