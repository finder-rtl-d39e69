// pointer_fetch: pipeline stage 1 of a FindeR bank.
//
// Every LFM request first reads the pointers that say which cells will
// compute it: the working array pointer (which of the NRHU RHU arrays takes
// this request), that RHU's working diagonal-pair pointer P_w and its NECP
// error-correcting pointers P_e with their valid bits. The pointers live in
// small dedicated arrays (log2(W) bits each: 7 x 10 = 70 bits per RHU for
// W = 1024, as in the paper). The working array pointer advances round robin
// on every accepted request so that the three RHUs take turns, which is how
// this design lets each RHU spend three cycles (RESET, SET, read) on one
// request while the stage accepts one request per cycle.
//
// Interface: in_valid accepts a request; out_* are registered and valid on
// the next cycle (one pipeline cycle). The wr_* port, driven by the wear
// controller, updates P_w or one P_e of one RHU. mnt_rhu/mnt_pw/mnt_pe_used
// is a combinational read port for the wear controller.
module pointer_fetch #(
  parameter int unsigned NRHU = 3,
  parameter int unsigned W    = 1024,
  parameter int unsigned NECP = 6,
  localparam int unsigned PW_W = $clog2(W),
  localparam int unsigned SEL_W = $clog2(NRHU)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         out_valid,
  output logic [SEL_W-1:0]             out_rhu,
  output logic [PW_W-1:0]              out_pw,
  output logic [NECP-1:0][PW_W-1:0]    out_pe,
  output logic [NECP-1:0]              out_pe_vld,
  // updates from the wear controller
  input  logic                         wr_pw_en,
  input  logic                         wr_pe_en,
  input  logic [SEL_W-1:0]             wr_pw_rhu,
  input  logic [SEL_W-1:0]             wr_pe_rhu,
  input  logic [PW_W-1:0]              wr_pw,
  input  logic [$clog2(NECP)-1:0]      wr_pe_idx,
  input  logic [PW_W-1:0]              wr_pe,
  // read port for the wear controller
  input  logic [SEL_W-1:0]             mnt_rhu,
  output logic [PW_W-1:0]              mnt_pw
);

  logic [PW_W-1:0]           pw_arr     [NRHU];
  logic [NECP-1:0][PW_W-1:0] pe_arr     [NRHU];
  logic [NECP-1:0]           pe_vld_arr [NRHU];
  logic [SEL_W-1:0]          wap;        // working array pointer

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wap       <= '0;
      out_valid <= 1'b0;
      for (int r = 0; r < NRHU; r++) begin
        pw_arr[r]     <= '0;
        pe_arr[r]     <= '0;
        pe_vld_arr[r] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) wap <= (wap == SEL_W'(NRHU-1)) ? '0 : wap + 1'b1;
      if (wr_pw_en) pw_arr[wr_pw_rhu] <= wr_pw;
      if (wr_pe_en) begin
        pe_arr[wr_pe_rhu][wr_pe_idx]     <= wr_pe;
        pe_vld_arr[wr_pe_rhu][wr_pe_idx] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_rhu    <= wap;
      out_pw     <= pw_arr[wap];
      out_pe     <= pe_arr[wap];
      out_pe_vld <= pe_vld_arr[wap];
    end
  end

  assign mnt_pw = pw_arr[mnt_rhu];

endmodule
