// rhu_stage: pipeline stage 3 of a FindeR bank, the Hamming distance step.
//
// An HD calculation needs a RESET, a SET and a read of one RHU, one cycle
// each, so the stage holds three RHUs that take requests in turn (the
// RHU number comes from the pointer-fetch stage). For a request that
// entered the pipeline in cycle 0:
//   cycle 1  RESET of its RHU, while the FM-Index bucket is being read
//   cycle 2  SET: bucket bits on the BLs, query pattern on the WLs
//   cycle 3  read: the summed current is held on the RHU's output
//   cycle 4  i_adc carries that current to the ADC (adc_convert high)
// Overlapping the RESET with the bucket read is this design's reading of
// the paper, which gives 3 RHU cycles in its pipeline figure but 20 ns for
// the RHU step in its 90 ns LFM latency.
//
// Query pattern (this design's choice; the paper only gives d - hd for a
// whole bucket): Occ needs the symbol count in the first off = pos mod d
// positions of the bucket only. Position j carries the read symbol when
// j < off; every other position, and the position of the terminator '$'
// (stored as an arbitrary 2-bit code), carries the bit-inverse of the
// stored symbol and therefore always mismatches. Then d - hd is exactly the
// number of read symbols among the first off positions, and the stored
// marker (which includes +d) minus hd is Count + Occ.
//
// pw is the working diagonal pair (P_w) read in the pointer-fetch stage for
// the RHU being SET; it addresses the RHU's drivers, and a SET aimed at a
// pair that is not the FORMed one finds no cells (an assertion checks that
// this never happens). pe/pe_vld are that RHU's error-correcting pointers.
// mnt_reform lets the wear controller BREAK/FORM the diagonal pair of one
// RHU while the pipeline is held. wearout_* marks a worn cell in one RHU
// (fault injection into the model); err_* is that RHU's error report.
module rhu_stage
  import finder_pkg::*;
#(
  parameter int unsigned D        = 128,
  parameter int unsigned W        = 1024,
  parameter int unsigned NECP     = 6,
  parameter int unsigned NRHU     = 3,
  parameter real         I_LRS_UA = 500.0,
  localparam int unsigned PW_W  = $clog2(W),
  localparam int unsigned SEL_W = $clog2(NRHU),
  localparam int unsigned OFF_W = $clog2(D)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // cycle 1
  input  logic                      rst_valid,
  input  logic [SEL_W-1:0]          rst_rhu,
  // cycle 2
  input  logic                      set_valid,
  input  logic [SEL_W-1:0]          set_rhu,
  input  logic [2*D-1:0]            bwt,
  input  sym_t                      sym,
  input  logic [OFF_W-1:0]          off,
  input  logic                      dollar_here,
  input  logic [OFF_W-1:0]          dollar_off,
  input  logic [PW_W-1:0]           pw,
  input  logic [NECP-1:0][PW_W-1:0] pe,
  input  logic [NECP-1:0]           pe_vld,
  // cycle 4
  output logic                      adc_convert,
  output real                       i_adc,
  // maintenance and faults
  input  logic                      mnt_reform,
  input  logic [SEL_W-1:0]          mnt_rhu,
  input  logic [PW_W-1:0]           mnt_pw,
  input  logic                      wearout_valid,
  input  logic [SEL_W-1:0]          wearout_rhu,
  input  logic [PW_W-1:0]           wearout_pos,
  output logic                      err_valid,
  output logic [SEL_W-1:0]          err_rhu,
  output logic [PW_W-1:0]           err_pos
);

  logic [2*D-1:0]            wl;
  logic                      rd_valid, cv_valid;
  logic [SEL_W-1:0]          rd_rhu, cv_rhu;
  logic [NECP-1:0][PW_W-1:0] rd_pe;
  logic [NECP-1:0]           rd_pe_vld;
  rhu_op_t                   op      [NRHU];
  real                       i_out   [NRHU];
  logic [NRHU-1:0]           e_valid;
  logic [PW_W-1:0]           e_pos   [NRHU];
  logic [PW_W-1:0]           f_pw    [NRHU];
  logic [NRHU-1:0]           pw_ok;

  // Word-line pattern: the read symbol on the counted prefix, the inverse
  // of the stored symbol everywhere else.
  always_comb begin
    for (int j = 0; j < D; j++) begin
      if (j < int'(off) && !(dollar_here && j == int'(dollar_off)))
        wl[2*j +: 2] = sym;
      else
        wl[2*j +: 2] = ~bwt[2*j +: 2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      cv_valid <= 1'b0;
    end else begin
      rd_valid <= set_valid;
      cv_valid <= rd_valid;
    end
  end

  always_ff @(posedge clk) begin
    rd_rhu    <= set_rhu;
    rd_pe     <= pe;
    rd_pe_vld <= pe_vld;
    cv_rhu    <= rd_rhu;
  end

  for (genvar r = 0; r < NRHU; r++) begin : g_rhu
    always_comb begin
      if (mnt_reform && mnt_rhu == SEL_W'(r))          op[r] = RHU_REFORM;
      else if (rst_valid && rst_rhu == SEL_W'(r))      op[r] = RHU_RESET;
      else if (set_valid && set_rhu == SEL_W'(r))      op[r] = RHU_SET;
      else if (rd_valid && rd_rhu == SEL_W'(r))        op[r] = RHU_READ;
      else                                             op[r] = RHU_NOP;
    end

    rhu #(.D(D), .W(W), .NECP(NECP), .I_LRS_UA(I_LRS_UA)) u_rhu (
      .clk,
      .op            (op[r]),
      .bl            (bwt),
      .wl            (wl),
      .pw            (mnt_pw),
      .sel_pw        (pw),
      .pe            (op[r] == RHU_READ ? rd_pe : pe),
      .pe_vld        (op[r] == RHU_READ ? rd_pe_vld : pe_vld),
      .wearout_valid (wearout_valid && wearout_rhu == SEL_W'(r)),
      .wearout_pos   (wearout_pos),
      .i_out         (i_out[r]),
      .err_valid     (e_valid[r]),
      .err_pos       (e_pos[r]),
      .formed_pw     (f_pw[r])
    );
  end

  for (genvar r = 0; r < NRHU; r++) begin : g_chk
    assign pw_ok[r] = (f_pw[r] == pw);
  end

  assign adc_convert = cv_valid;
  assign i_adc       = i_out[cv_rhu];

  always_comb begin
    err_valid = 1'b0;
    err_rhu   = '0;
    err_pos   = '0;
    for (int r = 0; r < NRHU; r++)
      if (e_valid[r]) begin
        err_valid = 1'b1;
        err_rhu   = SEL_W'(r);
        err_pos   = e_pos[r];
      end
  end

  // Two requests may never use one RHU in the same cycle.
  // The P_w handed to a SET must name the pair that is FORMed.
  a_pw_formed: assert property (@(posedge clk) disable iff (!rst_n)
    set_valid |-> pw_ok[set_rhu]);

  a_rhu_rotation: assert property (@(posedge clk) disable iff (!rst_n)
    !(set_valid && rd_valid && set_rhu == rd_rhu));

endmodule
