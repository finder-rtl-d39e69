// tb_wear_ctrl: counts accepted requests per RHU (round robin) and checks
// that after WL_PERIOD of them on one RHU the controller holds the
// pipeline, issues one REFORM after the drain time, keeps hold for
// BREAK_CYCLES, writes P_w + 2 and releases. Also checks ECP allocation:
// six failures of one RHU take pointers 0..5 with the reported positions,
// the seventh flags the RHU as dead.
module tb_wear_ctrl;
  localparam int NRHU = 3, W = 1024, NECP = 6, PERIOD = 20, BRK = 15, DRAIN = 4;
  logic clk = 0, rst_n = 0;
  logic acc_valid = 0;
  logic [1:0] acc_rhu = '0;
  logic hold, mnt_reform;
  logic [1:0] mnt_rhu, wr_pw_rhu, wr_pe_rhu;
  logic [9:0] mnt_pw, cur_pw, wr_pw, wr_pe;
  logic wr_pw_en, wr_pe_en;
  logic [2:0] wr_pe_idx;
  logic err_valid = 0;
  logic [1:0] err_rhu = '0;
  logic [9:0] err_pos = '0;
  logic [2:0] rhu_dead;
  logic ev_swap, ev_ecp;
  logic [9:0] pw_arr [3];
  int checks = 0, failures = 0, cycle = 0;
  int hold_start = -1, reform_at = -1, swaps = 0, ecps = 0;

  always #5 clk = ~clk;
  wear_ctrl #(.NRHU(NRHU), .W(W), .NECP(NECP), .WL_PERIOD(PERIOD), .BREAK_CYCLES(BRK), .DRAIN(DRAIN)) dut (.*);

  assign cur_pw = pw_arr[mnt_rhu];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle++;
    if (rst_n && wr_pw_en) pw_arr[wr_pw_rhu] <= wr_pw;
    if (rst_n && ev_swap) swaps++;
    if (rst_n && ev_ecp) ecps++;
  end

  initial begin
    int rr;
    rr = 0;
    pw_arr[0] = 10'd0; pw_arr[1] = 10'd0; pw_arr[2] = 10'd1022;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 3 x PERIOD requests: RHU 0 reaches the period first
    for (int k = 0; k < 3 * PERIOD + 40; k++) begin
      @(negedge clk);
      if (hold && hold_start < 0) hold_start = cycle;
      if (mnt_reform && reform_at < 0) begin
        reform_at = cycle;
        checks++;
        if (mnt_pw != pw_arr[mnt_rhu] + 10'd2 && !(mnt_rhu == 2 && mnt_pw == 10'd0)) failures++;
      end
      acc_valid = !hold;
      acc_rhu = 2'(rr);
      if (acc_valid) rr = (rr + 1) % 3;
    end
    // wait for all three RHUs to be retired once
    while (swaps < 3) @(negedge clk) begin
      acc_valid = !hold;
      acc_rhu = 2'(rr);
      if (acc_valid) rr = (rr + 1) % 3;
    end
    @(negedge clk) acc_valid = 0;
    checks++;
    if (pw_arr[0] != 10'd2 || pw_arr[1] != 10'd2 || pw_arr[2] != 10'd0) begin
      failures++;
      $display("FAIL pw %0d %0d %0d", pw_arr[0], pw_arr[1], pw_arr[2]);
    end
    checks++;
    if (hold_start < 0 || reform_at - hold_start != DRAIN) begin
      failures++;
      $display("FAIL timing hold %0d reform %0d", hold_start, reform_at);
    end
    // hold lasts the drain (DRAIN+1 cycles with the REFORM), the break
    // (BRK+1) and the P_w write-back (1)
    begin
      int len;
      len = 0;
      repeat (5) @(negedge clk);
      // retire RHU 1 again and measure hold length
      for (int k = 0; k < 200 && len == 0; k++) begin
        @(negedge clk);
        acc_valid = !hold; acc_rhu = 2'd1;
        if (hold) begin
          acc_valid = 0;
          while (hold) begin @(negedge clk); len++; end
        end
      end
      checks++;
      if (len != DRAIN + BRK + 3) begin failures++; $display("FAIL hold length %0d", len); end
    end
    @(negedge clk) acc_valid = 0;
    // ECP allocation on RHU 2
    for (int k = 0; k < 7; k++) begin
      @(negedge clk) begin err_valid = 1; err_rhu = 2'd2; err_pos = 10'(100 + k); end
      @(negedge clk) begin
        err_valid = 0;
        checks++;
        if (k < 6) begin
          if (!(wr_pe_en && wr_pe_rhu == 2'd2 && wr_pe_idx == 3'(k) && wr_pe == 10'(100 + k))) begin
            failures++; $display("FAIL ecp %0d", k);
          end
        end else if (wr_pe_en || rhu_dead != 3'b100) begin
          failures++; $display("FAIL dead flag");
        end
      end
    end
    checks++;
    if (ecps != 6) begin failures++; $display("FAIL ecp events %0d", ecps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
