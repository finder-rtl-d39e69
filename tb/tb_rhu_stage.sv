// tb_rhu_stage: issues one HD request per cycle to the three-RHU stage
// (RESET in cycle t, SET in t+1) and checks, in cycle t+3, that the
// current handed to the ADC is I_LRS * (d - number of read symbols among
// the first 'off' bucket positions), counted here, with the '$' position
// excluded. Also checks the rotation over the RHUs, and that a BREAK/FORM
// of one RHU and an ECP repair keep the results correct.
module tb_rhu_stage;
  import finder_pkg::*;
  localparam int D = 16, W = 64, NECP = 6, NRHU = 3, PW_W = 6, OFF_W = 4;
  logic clk = 0, rst_n = 0;
  logic rst_valid = 0, set_valid = 0;
  logic [1:0] rst_rhu = '0, set_rhu = '0;
  logic [2*D-1:0] bwt = '0;
  sym_t sym = SYM_A;
  logic [OFF_W-1:0] off = '0, dollar_off = '0;
  logic dollar_here = 0;
  logic [PW_W-1:0] pw = '0;
  logic [NECP-1:0][PW_W-1:0] pe = '0;
  logic [NECP-1:0] pe_vld = '0;
  logic adc_convert;
  real i_adc;
  logic mnt_reform = 0;
  logic [1:0] mnt_rhu = '0;
  logic [PW_W-1:0] mnt_pw = '0;
  logic wearout_valid = 0;
  logic [1:0] wearout_rhu = '0;
  logic [PW_W-1:0] wearout_pos = '0;
  logic err_valid;
  logic [1:0] err_rhu;
  logic [PW_W-1:0] err_pos;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  rhu_stage #(.D(D), .W(W), .NECP(NECP), .NRHU(NRHU)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic [2*D-1:0] b; int s; int o; bit dh; int doff; } req_t;

  function automatic int expect_hd(req_t r);
    int c = 0;
    for (int j = 0; j < r.o; j++)
      if (!(r.dh && j == r.doff) && int'(r.b[2*j +: 2]) == r.s) c++;
    return D - c;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_simple();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Straightforward scheduling with an explicit cycle table.
  task automatic run_simple();
    req_t r [0:599];
    int   rh[0:599];
    int   n = 600;
    int   start[0:599];
    int   t0 = 0, k = 0;
    for (int i = 0; i < n; i++) begin
      r[i].b = {$urandom()};
      r[i].s = $urandom_range(3);
      r[i].o = (i % 17 == 0) ? 0 : $urandom_range(D - 1);
      r[i].dh = ($urandom_range(3) == 0);
      r[i].doff = $urandom_range(D - 1);
    end
    // start cycles: one per cycle with random bubbles
    for (int i = 0; i < n; i++) begin
      t0 += ($urandom_range(4) == 0) ? 2 : 1;
      start[i] = t0;
      rh[i] = i % NRHU;
    end
    for (int t = 0; t <= t0 + 4; t++) begin
      @(negedge clk);
      rst_valid = 0; set_valid = 0; mnt_reform = 0; wearout_valid = 0;
      for (int i = 0; i < n; i++) begin
        if (start[i] == t) begin rst_valid = 1; rst_rhu = 2'(rh[i]); end
        if (start[i] + 1 == t) begin
          set_valid = 1; set_rhu = 2'(rh[i]);
          bwt = r[i].b; sym = sym_t'(r[i].s); off = OFF_W'(r[i].o);
          dollar_here = r[i].dh; dollar_off = OFF_W'(r[i].doff);
        end
      end
      // wear out a cell of RHU 1 in the middle, and repair it with an ECP
      if (t == 200) begin wearout_valid = 1; wearout_rhu = 2'd1; wearout_pos = 6'd7; end
      if (t == 202) begin pe[0] = 6'd7; pe_vld[0] = 1; end
      #1;
      for (int i = 0; i < n; i++) if (start[i] + 3 == t && (t < 195 || t > 210)) begin
        checks++;
        if (!adc_convert || i_adc != 500.0 * expect_hd(r[i])) begin
          failures++;
          $display("FAIL req %0d at %0d: conv=%0d current %f expected hd %0d", i, t, adc_convert, i_adc, expect_hd(r[i]));
        end
      end
      if (t == 201) begin
        checks++;
        if (!(err_valid && err_rhu == 2'd1 && err_pos == 6'd7)) begin failures++; $display("FAIL error report"); end
      end
    end
    // BREAK/FORM pair 4 in RHU 2; afterwards requests on RHU 2 use pw 4
    @(negedge clk) begin mnt_reform = 1; mnt_rhu = 2'd2; mnt_pw = 6'd4; end
    @(negedge clk) mnt_reform = 0;
    for (int i = 0; i < 30; i++) begin
      req_t q;
      q.b = $urandom(); q.s = $urandom_range(3); q.o = $urandom_range(D - 1); q.dh = 0; q.doff = 0;
      @(negedge clk) begin rst_valid = 1; rst_rhu = 2'd2; end
      @(negedge clk) begin rst_valid = 0; set_valid = 1; set_rhu = 2'd2; pw = 6'd4;
        bwt = q.b; sym = sym_t'(q.s); off = OFF_W'(q.o); dollar_here = 0; end
      @(negedge clk) set_valid = 0;
      @(negedge clk) begin
        #1;
        checks++;
        if (!adc_convert || i_adc != 500.0 * expect_hd(q)) begin
          failures++;
          $display("FAIL after reform: %f vs %0d", i_adc, expect_hd(q));
        end
        pw = 6'd0;
      end
    end
  endtask
endmodule
