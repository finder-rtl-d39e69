// tb_rhu: drives the RHU model through RESET / SET / READ sequences with
// random buckets and query patterns and checks the held current against
// I_LRS times the number of mismatching 2-bit symbols, counted here. Also
// checks the paper's example (bucket GA against TT gives hd 2), that cells
// of a pair that is not FORMed never switch, and that a worn cell gives a
// wrong count until an error-correcting pointer redirects its BL pair.
module tb_rhu;
  import finder_pkg::*;
  localparam int D = 16, W = 64, NECP = 6, PW_W = 6;
  logic clk = 0;
  rhu_op_t op = RHU_NOP;
  logic [2*D-1:0] bl = '0, wl = '0;
  logic [PW_W-1:0] pw = '0, sel_pw = '0;
  logic [NECP-1:0][PW_W-1:0] pe = '0;
  logic [NECP-1:0] pe_vld = '0;
  logic wearout_valid = 0;
  logic [PW_W-1:0] wearout_pos = '0;
  real i_out;
  logic err_valid;
  logic [PW_W-1:0] err_pos, formed_pw;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  rhu #(.D(D), .W(W), .NECP(NECP)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mism(logic [2*D-1:0] x, logic [2*D-1:0] y);
    int n = 0;
    for (int p = 0; p < D; p++) if (x[2*p +: 2] != y[2*p +: 2]) n++;
    return n;
  endfunction

  task automatic hd_calc(logic [2*D-1:0] b, logic [2*D-1:0] w);
    @(negedge clk) op = RHU_RESET;
    @(negedge clk) begin op = RHU_SET; bl = b; wl = w; end
    @(negedge clk) begin op = RHU_READ; bl = '0; wl = '0; end
    @(negedge clk) op = RHU_NOP;
  endtask

  task automatic check(int expect_n, string what);
    checks++;
    if (i_out != 500.0 * expect_n) begin
      failures++;
      $display("FAIL %s: current %f, expected %0d LRS", what, i_out, expect_n);
    end
  endtask

  initial begin
    logic [2*D-1:0] b, w;
    // paper example: BLs carry GA (10 00), WLs TT (11 11), 2 symbols differ
    b = '0; w = '0;
    b[3:0] = 4'b10_00; w[3:0] = 4'b11_11;
    hd_calc(b, w);
    check(2, "GA vs TT");
    for (int k = 0; k < 300; k++) begin
      b = {$urandom(), $urandom()};
      w = (k % 3 == 0) ? b ^ {$urandom(), $urandom()} & {D{2'b01}} : {$urandom(), $urandom()};
      hd_calc(b, w);
      check(mism(b, w), "random");
    end
    // drivers aimed at a pair that is not FORMed: nothing switches
    sel_pw = 6'd2;
    hd_calc('0, '1);
    check(0, "unformed pair");
    // FORM pair 2 and use it
    @(negedge clk) begin op = RHU_REFORM; pw = 6'd2; end
    @(negedge clk) op = RHU_NOP;
    checks++;
    if (formed_pw != 6'd2) failures++;
    hd_calc('0, '1);
    check(D, "pair 2 all mismatch");
    // wear out cell 5 (symbol 2, high bit): a mismatch only in that bit is lost
    @(negedge clk) begin wearout_valid = 1; wearout_pos = 6'd5; end
    @(negedge clk) wearout_valid = 0;
    checks++;
    if (!(err_valid && err_pos == 6'd5)) begin failures++; $display("FAIL no error report"); end
    b = '0; w = '0; w[5] = 1'b1;
    hd_calc(b, w);
    check(0, "worn cell");
    // an ECP pointer moves symbol 2 to the ECP array
    pe[3] = 6'd5; pe_vld[3] = 1'b1;
    hd_calc(b, w);
    check(1, "ECP repaired");
    for (int k = 0; k < 100; k++) begin
      b = {$urandom(), $urandom()};
      w = {$urandom(), $urandom()};
      hd_calc(b, w);
      check(mism(b, w), "random with ECP");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
