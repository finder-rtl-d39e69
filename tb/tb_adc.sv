// tb_adc: feeds currents of n LRS cells, with up to +-40 % of one LRS
// current of deviation, and checks the code is n one cycle after the
// conversion, and that it saturates at 255 and holds between conversions.
module tb_adc;
  logic clk = 0, convert = 0;
  real i_in = 0.0;
  logic [7:0] code;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  adc dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic conv(real i, int expect_code);
    @(negedge clk) begin convert = 1; i_in = i; end
    @(negedge clk) begin convert = 0; i_in = 12345.0; end
    checks++;
    if (code != 8'(expect_code)) begin
      failures++;
      $display("FAIL i=%f code=%0d expected %0d", i, code, expect_code);
    end
  endtask

  initial begin
    conv(0.0, 0);
    conv(500.0, 1);
    conv(128 * 500.0, 128);
    conv(300 * 500.0, 255);
    for (int k = 0; k < 2000; k++) begin
      int n;
      real dev;
      n   = $urandom_range(200);
      dev = (real'($urandom_range(800)) - 400.0) / 1000.0;   // -0.4 .. 0.4
      conv(500.0 * (real'(n) + dev), n);
    end
    // the code holds while no conversion is requested
    @(negedge clk) i_in = 0.0;
    @(negedge clk);
    checks++;
    if (code == 8'd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
