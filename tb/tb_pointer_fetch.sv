// tb_pointer_fetch: accepts requests with random gaps and checks that the
// working array pointer goes round 0,1,2 per accepted request, that the
// pointers come out one cycle later, and that P_w / P_e writes by the wear
// controller appear for the right RHU only (reference arrays kept here).
module tb_pointer_fetch;
  localparam int NRHU = 3, W = 1024, NECP = 6, PW_W = 10;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic out_valid;
  logic [1:0] out_rhu;
  logic [PW_W-1:0] out_pw;
  logic [NECP-1:0][PW_W-1:0] out_pe;
  logic [NECP-1:0] out_pe_vld;
  logic wr_pw_en = 0, wr_pe_en = 0;
  logic [1:0] wr_pw_rhu = '0, wr_pe_rhu = '0, mnt_rhu = '0;
  logic [PW_W-1:0] wr_pw = '0, wr_pe = '0, mnt_pw;
  logic [2:0] wr_pe_idx = '0;
  int checks = 0, failures = 0;
  logic [PW_W-1:0] ref_pw [3];
  logic [NECP-1:0][PW_W-1:0] ref_pe [3];
  logic [NECP-1:0] ref_vld [3];

  always #5 clk = ~clk;
  pointer_fetch #(.NRHU(NRHU), .W(W), .NECP(NECP)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_rhu = 0;
    bit pend = 0;
    int pend_rhu = 0;
    logic [PW_W-1:0] e_pw;
    logic [NECP-1:0][PW_W-1:0] e_pe;
    logic [NECP-1:0] e_vld;
    for (int r = 0; r < 3; r++) begin ref_pw[r] = '0; ref_pe[r] = '0; ref_vld[r] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      // check the output of last cycle's request
      if (pend) begin
        checks++;
        if (!out_valid || out_rhu != 2'(pend_rhu) || out_pw != e_pw ||
            out_pe != e_pe || out_pe_vld != e_vld) begin
          failures++;
          $display("FAIL k=%0d rhu %0d/%0d pw %0d/%0d", k, out_rhu, pend_rhu, out_pw, e_pw);
        end
      end else if (out_valid) begin
        failures++;
      end
      // random pointer updates (take effect for requests after this edge)
      wr_pw_en = ($urandom_range(9) == 0);
      wr_pe_en = ($urandom_range(9) == 0);
      wr_pw_rhu = 2'($urandom_range(2));
      wr_pe_rhu = 2'($urandom_range(2));
      wr_pw = PW_W'($urandom());
      wr_pe = PW_W'($urandom());
      wr_pe_idx = 3'($urandom_range(5));
      in_valid = ($urandom_range(3) != 0);
      mnt_rhu = 2'($urandom_range(2));
      #1;
      checks++;
      if (mnt_pw != ref_pw[mnt_rhu]) failures++;
      pend = in_valid;
      pend_rhu = exp_rhu;
      e_pw = ref_pw[exp_rhu]; e_pe = ref_pe[exp_rhu]; e_vld = ref_vld[exp_rhu];
      if (in_valid) exp_rhu = (exp_rhu + 1) % 3;
      @(posedge clk);
      if (wr_pw_en) ref_pw[wr_pw_rhu] = wr_pw;
      if (wr_pe_en) begin ref_pe[wr_pe_rhu][wr_pe_idx] = wr_pe; ref_vld[wr_pe_rhu][wr_pe_idx] = 1'b1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
