// wear_ctrl: wear leveling and error-correcting pointers of the RHUs in one
// bank.
//
// Wear leveling (as in the paper): a counter per RHU counts HD calculations.
// When one reaches WL_PERIOD (100K), the working diagonal line pair of that
// RHU is retired: its filaments are removed by BREAKING and the next pair is
// FORMed, and the working pointer P_w is advanced. This design holds the
// pipeline input for the whole operation (hold), waits DRAIN cycles until
// requests in flight have left the RHUs, issues one REFORM command, waits
// BREAK_CYCLES (about 100 us at 10 ns per cycle, the paper's BREAKING time),
// writes the new P_w (old + PW_STEP, modulo W) and releases the pipeline.
// How the pipeline treats the maintenance time is not given by the paper.
//
// Error-correcting pointers: when an RHU reports a failed cell (err_*), the
// next free of its NECP (6) pointers P_e is written with the cell position;
// from then on the RHU evaluates that cell's BL pair on the ECP array. The
// same P_e serve all diagonal pairs, as in the paper. An RHU with a seventh
// failure is flagged in rhu_dead.
//
// ev_swap and ev_ecp pulse once per pair change and per pointer allocated.
module wear_ctrl #(
  parameter int unsigned NRHU         = 3,
  parameter int unsigned W            = 1024,
  parameter int unsigned NECP         = 6,
  parameter int unsigned WL_PERIOD    = 100000,
  parameter int unsigned BREAK_CYCLES = 10000,
  parameter int unsigned DRAIN        = 4,
  parameter int unsigned PW_STEP      = 2,
  localparam int unsigned PW_W  = $clog2(W),
  localparam int unsigned SEL_W = $clog2(NRHU)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    acc_valid,    // request accepted ...
  input  logic [SEL_W-1:0]        acc_rhu,      // ... for this RHU
  output logic                    hold,         // stop accepting requests
  output logic                    mnt_reform,
  output logic [SEL_W-1:0]        mnt_rhu,
  output logic [PW_W-1:0]         mnt_pw,       // pair to FORM
  input  logic [PW_W-1:0]         cur_pw,       // P_w of mnt_rhu
  output logic                    wr_pw_en,
  output logic [SEL_W-1:0]        wr_pw_rhu,
  output logic [PW_W-1:0]         wr_pw,
  output logic                    wr_pe_en,
  output logic [SEL_W-1:0]        wr_pe_rhu,
  output logic [$clog2(NECP)-1:0] wr_pe_idx,
  output logic [PW_W-1:0]         wr_pe,
  input  logic                    err_valid,
  input  logic [SEL_W-1:0]        err_rhu,
  input  logic [PW_W-1:0]         err_pos,
  output logic [NRHU-1:0]         rhu_dead,
  output logic                    ev_swap,
  output logic                    ev_ecp
);

  typedef enum logic [1:0] {S_RUN, S_DRAIN, S_BREAK, S_DONE} state_t;

  localparam int unsigned CNT_W = $clog2(WL_PERIOD + 1);
  localparam int unsigned TMR_W = $clog2(BREAK_CYCLES + DRAIN + 1);

  state_t                   state;
  logic [CNT_W-1:0]         cnt     [NRHU];
  logic [$clog2(NECP+1)-1:0] pe_used [NRHU];
  logic [TMR_W-1:0]         timer;
  logic [SEL_W-1:0]         sel;
  logic                     due;
  logic [SEL_W-1:0]         due_rhu;

  always_comb begin
    due     = 1'b0;
    due_rhu = '0;
    for (int r = NRHU - 1; r >= 0; r--)
      if (cnt[r] >= CNT_W'(WL_PERIOD)) begin
        due     = 1'b1;
        due_rhu = SEL_W'(r);
      end
  end

  assign hold       = (state != S_RUN);
  assign mnt_rhu    = sel;
  assign mnt_pw     = PW_W'((int'(cur_pw) + PW_STEP) % W);
  assign mnt_reform = (state == S_DRAIN) && (timer == '0);
  assign wr_pw_en   = (state == S_DONE);
  assign wr_pw_rhu  = sel;
  assign wr_pw      = mnt_pw;
  assign ev_swap    = wr_pw_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RUN;
      timer <= '0;
      sel   <= '0;
      for (int r = 0; r < NRHU; r++) cnt[r] <= '0;
    end else begin
      if (acc_valid) cnt[acc_rhu] <= cnt[acc_rhu] + 1'b1;
      unique case (state)
        S_RUN: if (due) begin
          state <= S_DRAIN;
          sel   <= due_rhu;
          timer <= TMR_W'(DRAIN);
        end
        S_DRAIN: begin
          if (timer == '0) begin
            state <= S_BREAK;
            timer <= TMR_W'(BREAK_CYCLES);
          end else begin
            timer <= timer - 1'b1;
          end
        end
        S_BREAK: begin
          if (timer == '0) state <= S_DONE;
          else             timer <= timer - 1'b1;
        end
        S_DONE: begin
          state    <= S_RUN;
          cnt[sel] <= '0;
        end
        default: state <= S_RUN;
      endcase
    end
  end

  // Error-correcting pointer allocation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_pe_en <= 1'b0;
      ev_ecp   <= 1'b0;
      rhu_dead <= '0;
      wr_pe_rhu <= '0;
      wr_pe_idx <= '0;
      wr_pe     <= '0;
      for (int r = 0; r < NRHU; r++) pe_used[r] <= '0;
    end else begin
      wr_pe_en <= 1'b0;
      ev_ecp   <= 1'b0;
      if (err_valid) begin
        if (int'(pe_used[err_rhu]) < NECP) begin
          wr_pe_en <= 1'b1;
          ev_ecp   <= 1'b1;
          wr_pe_rhu <= err_rhu;
          wr_pe_idx <= pe_used[err_rhu][$clog2(NECP)-1:0];
          wr_pe     <= err_pos;
          pe_used[err_rhu] <= pe_used[err_rhu] + 1'b1;
        end else begin
          rhu_dead[err_rhu] <= 1'b1;
        end
      end
    end
  end

  a_no_accept_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_BREAK |-> !acc_valid);

endmodule
