// finder_bank: the FindeR LFM pipeline of one ReRAM bank.
//
// Each request asks for LFM(sym, pos) = Count(sym) + Occ(sym, pos) in one
// of the bank's two FM-Indexes. The pipeline has the paper's five stages:
//   1 pointer fetching  (cycle 0)    working RHU, P_w and P_e pointers
//   2 FM-Index memory   (cycle 1)    bucket pos/d with its four markers
//   3 RHU               (cycles 2-3) Hamming distance of the bucket prefix
//                                    (the RHU is RESET in cycle 1)
//   4 ADC               (cycle 4)    current -> hd
//   5 LUT adder         (cycles 5-8) marker(sym) + d - hd, 4 byte lookups
// The result leaves 9 cycles after the request was accepted, 90 ns at the
// paper's 100 MHz, and a new request is accepted every cycle. Results come
// out in request order with the request's tag.
//
// req_ready drops only while the wear controller retires an RHU diagonal
// pair. The terminator '$' of each BWT (dollar_pos, one per direction) is
// stored as an arbitrary 2-bit code and masked out of every count.
// The fm_wr_* and lut_prog_* ports load the FM-Index and the LUT adder
// tables; wearout_* injects a worn RHU cell. The ev_* outputs pulse for
// array reads, sense-amplifier reuse, diagonal pair changes and ECP
// allocations.
module finder_bank
  import finder_pkg::*;
#(
  parameter int unsigned D            = 128,
  parameter int unsigned FM_AW        = 26,
  parameter int unsigned NRHU         = 3,
  parameter int unsigned W            = 1024,
  parameter int unsigned NECP         = 6,
  parameter int unsigned WL_PERIOD    = 100000,
  parameter int unsigned BREAK_CYCLES = 10000,
  localparam int unsigned BW    = 2*D + 4*MAR_W,
  localparam int unsigned OFF_W = $clog2(D),
  localparam int unsigned PW_W  = $clog2(W),
  localparam int unsigned SEL_W = $clog2(NRHU)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        req_valid,
  output logic                        req_ready,
  input  lfm_req_t                    req,
  output logic                        resp_valid,
  output lfm_resp_t                   resp,
  input  logic                        fm_wr_en,
  input  logic [FM_AW-1:0]            fm_wr_addr,
  input  logic [BW-1:0]               fm_wr_data,
  input  logic                        lut_prog_en,
  input  logic [16:0]                 lut_prog_addr,
  input  logic [8:0]                  lut_prog_data,
  input  logic [1:0][POS_W-1:0]       dollar_pos,
  input  logic                        wearout_valid,
  input  logic [SEL_W-1:0]            wearout_rhu,
  input  logic [PW_W-1:0]             wearout_pos,
  output logic [NRHU-1:0]             rhu_dead,
  output logic                        ev_array_read,
  output logic                        ev_sa_hit,
  output logic                        ev_swap,
  output logic                        ev_ecp
);

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [MAR_W-1:0] mar;
  } add_op_t;

  logic      hold, accept;
  lfm_req_t  s1_req, s2_req;
  logic      s2_valid, s3_valid, s4_valid, s5_valid;
  add_op_t   s3_op, s4_op, s5_op;

  // stage 1 outputs
  logic                      pf_valid;
  logic [SEL_W-1:0]          pf_rhu;
  logic [PW_W-1:0]           pf_pw;
  logic [NECP-1:0][PW_W-1:0] pf_pe;
  logic [NECP-1:0]           pf_pe_vld;
  // stage 2 side information
  logic [SEL_W-1:0]          s2_rhu;
  logic [PW_W-1:0]           s2_pw;
  logic [NECP-1:0][PW_W-1:0] s2_pe;
  logic [NECP-1:0]           s2_pe_vld;
  logic                      s2_dollar_here;
  logic [BW-1:0]             bucket;
  // wear controller <-> pointer arrays
  logic                      wr_pw_en, wr_pe_en, mnt_reform;
  logic [SEL_W-1:0]          wr_pw_rhu, wr_pe_rhu, mnt_rhu;
  logic [PW_W-1:0]           wr_pw, wr_pe, mnt_pw, cur_pw;
  logic [$clog2(NECP)-1:0]   wr_pe_idx;
  logic                      err_valid;
  logic [SEL_W-1:0]          err_rhu;
  logic [PW_W-1:0]           err_pos;
  // ADC
  logic                      adc_convert;
  real                       i_adc;
  logic [7:0]                hd;

  assign req_ready = !hold;
  assign accept    = req_valid && !hold;

  // ---------------- stage 1: pointer fetching ----------------
  pointer_fetch #(.NRHU(NRHU), .W(W), .NECP(NECP)) u_ptr (
    .clk, .rst_n,
    .in_valid (accept),
    .out_valid(pf_valid), .out_rhu(pf_rhu), .out_pw(pf_pw),
    .out_pe(pf_pe), .out_pe_vld(pf_pe_vld),
    .wr_pw_en, .wr_pe_en, .wr_pw_rhu, .wr_pe_rhu, .wr_pw, .wr_pe_idx, .wr_pe,
    .mnt_rhu, .mnt_pw(cur_pw)
  );

  always_ff @(posedge clk) if (accept) s1_req <= req;

  // ---------------- stage 2: FM-Index memory ----------------
  function automatic logic [FM_AW-1:0] bucket_addr(input logic dir, input logic [POS_W-1:0] pos);
    logic [POS_W-1:0] b;
    b = pos >> OFF_W;
    return {dir, b[FM_AW-2:0]};
  endfunction

  fm_index_mem #(.D(D), .AW(FM_AW)) u_fm (
    .clk, .rst_n,
    .wr_en(fm_wr_en), .wr_addr(fm_wr_addr), .wr_data(fm_wr_data),
    .rd_en(pf_valid), .rd_addr(bucket_addr(s1_req.dir, s1_req.pos)),
    .keep_sa(s1_req.keep_sa), .from_sa(s1_req.from_sa),
    .bucket, .array_read(ev_array_read), .sa_hit(ev_sa_hit)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s3_valid <= 1'b0;
      s4_valid <= 1'b0;
      s5_valid <= 1'b0;
    end else begin
      s2_valid <= pf_valid;
      s3_valid <= s2_valid;
      s4_valid <= s3_valid;
      s5_valid <= s4_valid;
    end
  end

  always_ff @(posedge clk) begin
    s2_req         <= s1_req;
    s2_rhu         <= pf_rhu;
    s2_pw          <= pf_pw;
    s2_pe          <= pf_pe;
    s2_pe_vld      <= pf_pe_vld;
    s2_dollar_here <= (s1_req.pos >> OFF_W) == (dollar_pos[s1_req.dir] >> OFF_W);
  end

  // ---------------- stage 3: RHU (RESET in cycle 1) ----------------
  rhu_stage #(.D(D), .W(W), .NECP(NECP), .NRHU(NRHU)) u_rhus (
    .clk, .rst_n,
    .rst_valid(pf_valid), .rst_rhu(pf_rhu),
    .set_valid(s2_valid), .set_rhu(s2_rhu),
    .bwt(bucket[2*D-1:0]), .sym(s2_req.sym), .off(s2_req.pos[OFF_W-1:0]),
    .dollar_here(s2_dollar_here), .dollar_off(dollar_pos[s2_req.dir][OFF_W-1:0]),
    .pw(s2_pw), .pe(s2_pe), .pe_vld(s2_pe_vld),
    .adc_convert, .i_adc,
    .mnt_reform, .mnt_rhu, .mnt_pw,
    .wearout_valid, .wearout_rhu, .wearout_pos,
    .err_valid, .err_rhu, .err_pos
  );

  always_ff @(posedge clk) begin
    s3_op.tag <= s2_req.tag;
    s3_op.mar <= bucket[2*D + MAR_W*int'(s2_req.sym) +: MAR_W];
    s4_op     <= s3_op;
    s5_op     <= s4_op;
  end

  // ---------------- stage 4: ADC ----------------
  adc u_adc (.clk, .convert(adc_convert), .i_in(i_adc), .code(hd));

  // ---------------- stage 5: LUT adders ----------------
  lut_adder_stage u_add (
    .clk, .rst_n,
    .prog_en(lut_prog_en), .prog_addr(lut_prog_addr), .prog_data(lut_prog_data),
    .in_valid(s5_valid), .in_tag(s5_op.tag), .mar(s5_op.mar), .hd,
    .out_valid(resp_valid), .out_tag(resp.tag), .result(resp.value)
  );

  // ---------------- wear leveling and ECPs ----------------
  wear_ctrl #(.NRHU(NRHU), .W(W), .NECP(NECP), .WL_PERIOD(WL_PERIOD),
              .BREAK_CYCLES(BREAK_CYCLES)) u_wear (
    .clk, .rst_n,
    .acc_valid(pf_valid), .acc_rhu(pf_rhu),
    .hold, .mnt_reform, .mnt_rhu, .mnt_pw, .cur_pw,
    .wr_pw_en, .wr_pw_rhu, .wr_pw, .wr_pe_en, .wr_pe_rhu, .wr_pe_idx, .wr_pe,
    .err_valid, .err_rhu, .err_pos,
    .rhu_dead, .ev_swap, .ev_ecp
  );

endmodule
