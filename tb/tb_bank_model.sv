// tb_bank_model: behavioural stand-in for one bank pipeline, used by the
// scheduler and SMC testbenches. It answers each LFM request with
// Count(sym)+Occ(sym,pos) from tb_fm_pkg::g_fm[dir], 9 cycles after the
// request was accepted, one per cycle. req_ready drops at random when
// STALLS is set. It also checks the coalescing rule: a from_sa request
// must directly follow a keep_sa request of the same bucket, and a keep_sa
// request is made exactly when low and high share a bucket.
module tb_bank_model
  import finder_pkg::*;
  import tb_fm_pkg::*;
#(
  parameter int D      = 4,
  parameter bit STALLS = 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  lfm_req_t  req,
  output logic      resp_valid,
  output lfm_resp_t resp,
  output int        errors,
  output int        coalesced,
  output int        accepted
);
  lfm_resp_t pipe_v [9];
  logic      pipe_ok [9];
  logic      last_keep = 0;
  int        last_bucket = -1;

  initial begin
    errors = 0; coalesced = 0; accepted = 0;
    for (int i = 0; i < 9; i++) pipe_ok[i] = 0;
    req_ready = 1;
  end

  always @(posedge clk) begin
    for (int i = 8; i > 0; i--) begin
      pipe_v[i]  <= pipe_v[i-1];
      pipe_ok[i] <= pipe_ok[i-1];
    end
    pipe_ok[0] <= rst_n && req_valid && req_ready;
    if (rst_n && req_valid && req_ready) begin
      lfm_resp_t r;
      accepted <= accepted + 1;
      r.tag   = req.tag;
      r.value = 32'(g_fm[req.dir].lfm(int'(req.sym), int'(req.pos)));
      pipe_v[0] <= r;
      if (req.from_sa) begin
        coalesced <= coalesced + 1;
        if (!last_keep || int'(req.pos) / D != last_bucket) errors <= errors + 1;
      end
      last_keep   <= req.keep_sa;
      last_bucket <= int'(req.pos) / D;
    end
    if (STALLS) req_ready <= ($urandom_range(7) != 0);
  end

  assign resp_valid = pipe_ok[8];
  assign resp       = pipe_v[8];
endmodule
