// finder_top: the FindeR NVDIMM, FM-Index backward search in ReRAM banks.
//
// The slave memory controller (smc) takes backward-search requests from the
// host and runs them on NB bank pipelines (finder_bank), one LFM result per
// bank per cycle. Every bank holds its own copy of the bi-directional
// FM-Index (fm_wr_* writes one bucket of one bank) and its own four LUT
// adders, which the lut_prog_* port writes in all banks at once. dollar_pos
// gives the position of the terminator '$' in the forward and in the
// reverse BWT. The host receives the final SA interval (low, high); turning
// it into genome positions through the suffix array is left to the host.
//
// wearout_* marks a worn cell in one RHU of one bank (for fault studies of
// the RHU models); rhu_dead flags RHUs whose six error-correcting pointers
// are used up. The ev_* vectors pulse per bank for coalesced request pairs,
// sense-amplifier hits, array reads, diagonal-pair changes, ECP allocations
// and cycles lost to a full bank queue; bank_hold is high while a bank
// retires an RHU diagonal pair.
module finder_top
  import finder_pkg::*;
#(
  parameter int unsigned NB           = 8,
  parameter int unsigned D            = 128,
  parameter int unsigned FM_AW        = 26,
  parameter int unsigned CTX          = 16,
  parameter int unsigned QMAX         = 128,
  parameter int unsigned QDEPTH       = 16,
  parameter int unsigned ID_W         = 16,
  parameter int unsigned WL_PERIOD    = 100000,
  parameter int unsigned BREAK_CYCLES = 10000,
  localparam int unsigned NRHU  = 3,
  localparam int unsigned W     = 1024,
  localparam int unsigned NECP  = 6,
  localparam int unsigned BW    = 2*D + 4*MAR_W,
  localparam int unsigned LEN_W = $clog2(QMAX + 1),
  localparam int unsigned NB_W  = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned PW_W  = $clog2(W)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NB-1:0]               bank_en,
  input  logic [1:0][POS_W-1:0]       dollar_pos,
  // host search requests and results
  input  logic                        h_req_valid,
  output logic                        h_req_ready,
  input  logic [ID_W-1:0]             h_req_id,
  input  logic [QMAX-1:0][1:0]        h_req_query,
  input  logic [LEN_W-1:0]            h_req_len,
  input  logic [POS_W-1:0]            h_req_low,
  input  logic [POS_W-1:0]            h_req_high,
  input  logic                        h_req_dir,
  output logic                        h_resp_valid,
  input  logic                        h_resp_ready,
  output logic [ID_W-1:0]             h_resp_id,
  output logic [POS_W-1:0]            h_resp_low,
  output logic [POS_W-1:0]            h_resp_high,
  // table loading
  input  logic                        fm_wr_en,
  input  logic [NB_W-1:0]             fm_wr_bank,
  input  logic [FM_AW-1:0]            fm_wr_addr,
  input  logic [BW-1:0]               fm_wr_data,
  input  logic                        lut_prog_en,
  input  logic [16:0]                 lut_prog_addr,
  input  logic [8:0]                  lut_prog_data,
  // RHU cell wear-out injection and status
  input  logic                        wearout_valid,
  input  logic [NB_W-1:0]             wearout_bank,
  input  logic [$clog2(NRHU)-1:0]     wearout_rhu,
  input  logic [PW_W-1:0]             wearout_pos,
  output logic [NB-1:0][NRHU-1:0]     rhu_dead,
  output logic [NB-1:0]               bank_hold,
  output logic [NB-1:0]               ev_coalesce,
  output logic [NB-1:0]               ev_sa_hit,
  output logic [NB-1:0]               ev_array_read,
  output logic [NB-1:0]               ev_swap,
  output logic [NB-1:0]               ev_ecp,
  output logic [NB-1:0]               ev_qfull
);

  logic [NB-1:0]        bq_valid, bq_ready, res_valid;
  lfm_req_t [NB-1:0]    bq_req;
  lfm_resp_t [NB-1:0]   res;

  smc #(.NB(NB), .D(D), .CTX(CTX), .QMAX(QMAX), .QDEPTH(QDEPTH), .ID_W(ID_W)) u_smc (
    .clk, .rst_n, .bank_en,
    .h_req_valid, .h_req_ready, .h_req_id, .h_req_query, .h_req_len,
    .h_req_low, .h_req_high, .h_req_dir,
    .h_resp_valid, .h_resp_ready, .h_resp_id, .h_resp_low, .h_resp_high,
    .bq_valid, .bq_ready, .bq_req, .res_valid, .res,
    .ev_coalesce, .ev_qfull
  );

  for (genvar b = 0; b < NB; b++) begin : g_bank
    finder_bank #(.D(D), .FM_AW(FM_AW), .NRHU(NRHU), .W(W), .NECP(NECP),
                  .WL_PERIOD(WL_PERIOD), .BREAK_CYCLES(BREAK_CYCLES)) u_bank (
      .clk, .rst_n,
      .req_valid(bq_valid[b]), .req_ready(bq_ready[b]), .req(bq_req[b]),
      .resp_valid(res_valid[b]), .resp(res[b]),
      .fm_wr_en(fm_wr_en && fm_wr_bank == NB_W'(b)), .fm_wr_addr, .fm_wr_data,
      .lut_prog_en, .lut_prog_addr, .lut_prog_data,
      .dollar_pos,
      .wearout_valid(wearout_valid && wearout_bank == NB_W'(b)),
      .wearout_rhu, .wearout_pos,
      .rhu_dead(rhu_dead[b]),
      .ev_array_read(ev_array_read[b]), .ev_sa_hit(ev_sa_hit[b]),
      .ev_swap(ev_swap[b]), .ev_ecp(ev_ecp[b])
    );
    assign bank_hold[b] = !bq_ready[b];
  end

endmodule
