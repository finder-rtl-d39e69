// smc_bank_sched: the part of the slave memory controller (SMC) that runs
// the backward searches assigned to one bank.
//
// Each search occupies a context: its read Q (up to QMAX 2-bit symbols,
// Q[0] first), the number of symbols still to process, the SA interval
// (low, high) and the FM-Index direction. A backward search processes the
// read from its last symbol to its first. One iteration issues two LFM
// requests into the bank queue, low then high, with the symbol Q[i]; their
// results are the new low and high. The search ends when the interval is
// empty (low >= high) or every symbol has been used, and the final
// (low, high) is returned. A search that arrives with an empty interval or
// no symbols is returned unchanged.
//
// Coalescing (as in the paper): when low and high fall into the same
// d-symbol bucket, the low request is marked keep_sa and the high request
// from_sa, so the bucket is read from the arrays once and the high request
// takes it from the sense amplifiers. The two requests of an iteration are
// pushed on consecutive cycles by this block alone, so they are adjacent in
// the queue and in the pipeline.
//
// Contexts are picked lowest-index first; the pipeline answers in order, so
// the low result of an iteration always arrives just before its high
// result. Tags are {context, is_high}. ev_coalesce pulses per coalesced
// pair, ev_qfull for each cycle a ready request waits on a full queue.
module smc_bank_sched
  import finder_pkg::*;
#(
  parameter int unsigned D      = 128,
  parameter int unsigned CTX    = 16,
  parameter int unsigned QMAX   = 128,
  parameter int unsigned QDEPTH = 16,
  parameter int unsigned ID_W   = 16,
  localparam int unsigned LEN_W = $clog2(QMAX + 1),
  localparam int unsigned CTX_W = $clog2(CTX)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // new searches
  input  logic                   new_valid,
  output logic                   new_ready,
  input  logic [ID_W-1:0]        new_id,
  input  logic [QMAX-1:0][1:0]   new_query,
  input  logic [LEN_W-1:0]       new_len,
  input  logic [POS_W-1:0]       new_low,
  input  logic [POS_W-1:0]       new_high,
  input  logic                   new_dir,
  // bank queue towards the pipeline
  output logic                   bq_valid,
  input  logic                   bq_ready,
  output lfm_req_t               bq_req,
  // results from the pipeline
  input  logic                   res_valid,
  input  lfm_resp_t              res,
  // finished searches
  output logic                   done_valid,
  input  logic                   done_ready,
  output logic [ID_W-1:0]        done_id,
  output logic [POS_W-1:0]       done_low,
  output logic [POS_W-1:0]       done_high,
  output logic                   ev_coalesce,
  output logic                   ev_qfull
);

  typedef enum logic [1:0] {C_FREE, C_READY, C_WAIT, C_DONE} cstate_t;

  localparam int unsigned OFF_W = $clog2(D);
  localparam int unsigned REQ_W = $bits(lfm_req_t);

  cstate_t                cst  [CTX];
  logic [ID_W-1:0]        cid  [CTX];
  logic [QMAX-1:0][1:0]   cq   [CTX];
  logic [LEN_W-1:0]       crem [CTX];
  logic [POS_W-1:0]       clo  [CTX];
  logic [POS_W-1:0]       chi  [CTX];
  logic [POS_W-1:0]       cnl  [CTX];   // new low of the iteration in flight
  logic                   cdir [CTX];

  // free / ready / done context search
  logic             any_free, any_ready, any_done;
  logic [CTX_W-1:0] free_c, ready_c, done_c;

  always_comb begin
    any_free = 1'b0;  free_c  = '0;
    any_ready = 1'b0; ready_c = '0;
    any_done = 1'b0;  done_c  = '0;
    for (int c = CTX - 1; c >= 0; c--) begin
      if (cst[c] == C_FREE)  begin any_free  = 1'b1; free_c  = CTX_W'(c); end
      if (cst[c] == C_READY) begin any_ready = 1'b1; ready_c = CTX_W'(c); end
      if (cst[c] == C_DONE)  begin any_done  = 1'b1; done_c  = CTX_W'(c); end
    end
  end

  // ---------------- issue ----------------
  logic             iss_high;     // second request of a pair pending
  logic [CTX_W-1:0] iss_c;
  logic             iss_coal;
  logic             q_push, q_full, q_empty;
  lfm_req_t         q_din, q_dout;
  logic             start_pair;
  logic             coal_now;
  logic [CTX_W:0]   unused_count;

  assign coal_now   = (clo[ready_c] >> OFF_W) == (chi[ready_c] >> OFF_W);
  assign start_pair = !iss_high && any_ready && !q_full;
  assign q_push     = start_pair || (iss_high && !q_full);
  assign ev_qfull   = q_full && (iss_high || any_ready);

  always_comb begin
    q_din = '0;
    if (iss_high) begin
      q_din.tag     = TAG_W'({iss_c, 1'b1});
      q_din.dir     = cdir[iss_c];
      q_din.pos     = chi[iss_c];
      q_din.sym     = sym_t'(cq[iss_c][crem[iss_c] - 1'b1]);
      q_din.from_sa = iss_coal;
    end else begin
      q_din.tag     = TAG_W'({ready_c, 1'b0});
      q_din.dir     = cdir[ready_c];
      q_din.pos     = clo[ready_c];
      q_din.sym     = sym_t'(cq[ready_c][crem[ready_c] - 1'b1]);
      q_din.keep_sa = coal_now;
    end
  end

  sync_fifo #(.WIDTH(REQ_W), .DEPTH(QDEPTH)) u_bank_queue (
    .clk, .rst_n,
    .push(q_push), .din(q_din),
    .pop(bq_valid && bq_ready), .dout(q_dout),
    .full(q_full), .empty(q_empty), .count(unused_count)
  );

  assign bq_valid = !q_empty;
  assign bq_req   = q_dout;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss_high    <= 1'b0;
      iss_c       <= '0;
      iss_coal    <= 1'b0;
      ev_coalesce <= 1'b0;
    end else begin
      ev_coalesce <= 1'b0;
      if (start_pair) begin
        iss_high    <= 1'b1;
        iss_c       <= ready_c;
        iss_coal    <= coal_now;
        ev_coalesce <= coal_now;
      end else if (iss_high && !q_full) begin
        iss_high <= 1'b0;
      end
    end
  end

  // ---------------- contexts ----------------
  logic [CTX_W-1:0] res_c;
  logic [POS_W-1:0] it_lo, it_hi;
  logic [LEN_W-1:0] it_rem;

  assign res_c  = res.tag[CTX_W:1];
  assign it_lo  = cnl[res_c];
  assign it_hi  = res.value;
  assign it_rem = crem[res_c] - 1'b1;

  assign new_ready = any_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CTX; c++) cst[c] <= C_FREE;
    end else begin
      if (new_valid && any_free) begin
        cst[free_c]  <= (new_len == '0 || new_low >= new_high) ? C_DONE : C_READY;
        cid[free_c]  <= new_id;
        cq[free_c]   <= new_query;
        crem[free_c] <= new_len;
        clo[free_c]  <= new_low;
        chi[free_c]  <= new_high;
        cdir[free_c] <= new_dir;
      end
      if (start_pair) cst[ready_c] <= C_WAIT;
      if (res_valid) begin
        if (!res.tag[0]) begin
          cnl[res_c] <= res.value;
        end else begin
          clo[res_c]  <= it_lo;
          chi[res_c]  <= it_hi;
          crem[res_c] <= it_rem;
          cst[res_c]  <= (it_lo >= it_hi || it_rem == '0) ? C_DONE : C_READY;
        end
      end
      if (done_valid && done_ready) cst[done_c] <= C_FREE;
    end
  end

  assign done_valid = any_done;
  assign done_id    = cid[done_c];
  assign done_low   = clo[done_c];
  assign done_high  = chi[done_c];

  a_result_for_waiting_ctx: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid |-> cst[res_c] == C_WAIT);

endmodule
