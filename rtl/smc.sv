// smc: slave memory controller of the FindeR NVDIMM.
//
// The host submits backward searches (read, length, start interval,
// direction, an id) on the h_req_* handshake and gets the final SA interval
// back on h_resp_*. The SMC hands each search to one of the enabled banks
// (bank_en), going round the banks and skipping banks with no free context;
// each bank's scheduler then runs the search iteration by iteration through
// its bank queue and pipeline. Finished searches of all banks are returned
// round robin. Choosing the bank per search is this design's choice: every
// bank holds a full copy of the FM-Index, and the paper only says that the
// bank is decoded from the request address.
//
// The bank-side ports (bq_*, res_*) connect to the bank pipelines.
module smc
  import finder_pkg::*;
#(
  parameter int unsigned NB     = 8,
  parameter int unsigned D      = 128,
  parameter int unsigned CTX    = 16,
  parameter int unsigned QMAX   = 128,
  parameter int unsigned QDEPTH = 16,
  parameter int unsigned ID_W   = 16,
  localparam int unsigned LEN_W = $clog2(QMAX + 1),
  localparam int unsigned NB_W  = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NB-1:0]          bank_en,
  // host requests
  input  logic                   h_req_valid,
  output logic                   h_req_ready,
  input  logic [ID_W-1:0]        h_req_id,
  input  logic [QMAX-1:0][1:0]   h_req_query,
  input  logic [LEN_W-1:0]       h_req_len,
  input  logic [POS_W-1:0]       h_req_low,
  input  logic [POS_W-1:0]       h_req_high,
  input  logic                   h_req_dir,
  // host responses
  output logic                   h_resp_valid,
  input  logic                   h_resp_ready,
  output logic [ID_W-1:0]        h_resp_id,
  output logic [POS_W-1:0]       h_resp_low,
  output logic [POS_W-1:0]       h_resp_high,
  // banks
  output logic [NB-1:0]          bq_valid,
  input  logic [NB-1:0]          bq_ready,
  output lfm_req_t [NB-1:0]      bq_req,
  input  logic [NB-1:0]          res_valid,
  input  lfm_resp_t [NB-1:0]     res,
  output logic [NB-1:0]          ev_coalesce,
  output logic [NB-1:0]          ev_qfull
);

  logic [NB-1:0]            new_ready, new_valid;
  logic [NB-1:0]            done_valid, done_ready;
  logic [ID_W-1:0]          done_id   [NB];
  logic [POS_W-1:0]         done_low  [NB];
  logic [POS_W-1:0]         done_high [NB];
  logic [NB_W-1:0]          rr_req, rr_resp, tgt, src;
  logic                     tgt_ok, src_ok;

  // dispatcher: first enabled bank with a free context, from rr_req on
  always_comb begin
    tgt_ok = 1'b0;
    tgt    = '0;
    for (int k = NB - 1; k >= 0; k--) begin
      int b;
      b = (int'(rr_req) + k) % NB;
      if (bank_en[b] && new_ready[b]) begin
        tgt_ok = 1'b1;
        tgt    = NB_W'(b);
      end
    end
  end

  assign h_req_ready = tgt_ok;
  always_comb begin
    new_valid = '0;
    new_valid[tgt] = h_req_valid && tgt_ok;
  end

  // response arbiter
  always_comb begin
    src_ok = 1'b0;
    src    = '0;
    for (int k = NB - 1; k >= 0; k--) begin
      int b;
      b = (int'(rr_resp) + k) % NB;
      if (done_valid[b]) begin
        src_ok = 1'b1;
        src    = NB_W'(b);
      end
    end
  end

  assign h_resp_valid = src_ok;
  assign h_resp_id    = done_id[src];
  assign h_resp_low   = done_low[src];
  assign h_resp_high  = done_high[src];
  always_comb begin
    done_ready = '0;
    done_ready[src] = src_ok && h_resp_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_req  <= '0;
      rr_resp <= '0;
    end else begin
      if (h_req_valid && tgt_ok)
        rr_req <= (int'(tgt) == NB - 1) ? '0 : tgt + 1'b1;
      if (src_ok && h_resp_ready)
        rr_resp <= (int'(src) == NB - 1) ? '0 : src + 1'b1;
    end
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    smc_bank_sched #(.D(D), .CTX(CTX), .QMAX(QMAX), .QDEPTH(QDEPTH), .ID_W(ID_W)) u_sched (
      .clk, .rst_n,
      .new_valid(new_valid[b]), .new_ready(new_ready[b]),
      .new_id(h_req_id), .new_query(h_req_query), .new_len(h_req_len),
      .new_low(h_req_low), .new_high(h_req_high), .new_dir(h_req_dir),
      .bq_valid(bq_valid[b]), .bq_ready(bq_ready[b]), .bq_req(bq_req[b]),
      .res_valid(res_valid[b]), .res(res[b]),
      .done_valid(done_valid[b]), .done_ready(done_ready[b]),
      .done_id(done_id[b]), .done_low(done_low[b]), .done_high(done_high[b]),
      .ev_coalesce(ev_coalesce[b]), .ev_qfull(ev_qfull[b])
    );
  end

endmodule
