// rhu: behavioural model of a ReRAM Hamming distance unit (RHU). This is a
// model of an analog ReRAM crossbar, not synthesizable logic.
//
// A W x W unipolar ReRAM array in which only one pair of diagonal lines is
// FORMed (has filaments); all other cells stay in HRS. One HD calculation is
// three operations on consecutive cycles:
//   RESET  all cells of the working diagonal pair go to HRS;
//   SET    cell j is switched to LRS when the voltage on its word line wl[j]
//          differs from the one on its bit line bl[j] (1.5 V vs 0 V);
//   READ   1 V on all BLs, WLs grounded; each pair of BLs (the two bits of
//          one DNA symbol) shares a current-limiting transistor, so a symbol
//          contributes one LRS current whether one or both of its cells are
//          LRS. The summed current is held (the TIA) on i_out.
// So i_out = I_LRS_UA * (number of 2-bit symbols where wl and bl differ).
//
// Endurance support follows the paper: the pair in use is named by the
// working pointer pw; REFORM breaks the old pair and forms the pair pw
// (fresh cells). Up to NECP error-correcting pointers pe[k] name a failed
// cell; the BL pair holding that cell is then evaluated on BL pair k of the
// ECP array instead. A cell wears out when wearout_valid names it; from then
// on it cannot be SET. The chip's error detecting unit, which the paper uses
// but does not describe, is modelled as reporting that cell on err_pos one
// cycle later. The drivers address the pair named by sel_pw (the P_w read
// in the pointer stage); cells of a pair that is not FORMed have no filament
// and stay in HRS. Only the first 2*D cells of a diagonal line are driven.
module rhu
  import finder_pkg::*;
#(
  parameter int unsigned D        = 128,   // symbols per BWT bucket
  parameter int unsigned W        = 1024,  // array width
  parameter int unsigned NECP     = 6,     // error-correcting pointers
  parameter real         I_LRS_UA = 500.0  // 1 V read over a 2 kOhm LRS cell
) (
  input  logic                          clk,
  input  rhu_op_t                       op,
  input  logic [2*D-1:0]                bl,       // BWT bucket bits
  input  logic [2*D-1:0]                wl,       // query pattern bits
  input  logic [$clog2(W)-1:0]          pw,       // pair to FORM on REFORM
  input  logic [$clog2(W)-1:0]          sel_pw,   // pair the drivers address
  input  logic [NECP-1:0][$clog2(W)-1:0] pe,      // failed cell positions
  input  logic [NECP-1:0]               pe_vld,
  input  logic                          wearout_valid,
  input  logic [$clog2(W)-1:0]          wearout_pos,
  output real                           i_out,    // held read current, uA
  output logic                          err_valid,
  output logic [$clog2(W)-1:0]          err_pos,
  output logic [$clog2(W)-1:0]          formed_pw // pair currently FORMed
);

  logic [2*D-1:0]    lrs;       // state of the working diagonal pair
  logic [2*D-1:0]    worn;      // cells that can no longer be SET
  logic [2*NECP-1:0] ecp_lrs;   // cells of the ECP array's BL pairs

  initial begin
    lrs       = '0;
    worn      = '0;
    ecp_lrs   = '0;
    i_out     = 0.0;
    formed_pw = '0;
    err_valid = 1'b0;
    err_pos   = '0;
  end

  // ECP slot that replaces symbol p, or -1.
  function automatic int ecp_slot(input int p);
    ecp_slot = -1;
    for (int k = 0; k < NECP; k++)
      if (pe_vld[k] && int'(pe[k][$clog2(W)-1:1]) == p) ecp_slot = k;
  endfunction

  always @(posedge clk) begin
    err_valid <= wearout_valid;
    err_pos   <= wearout_pos;
    if (wearout_valid && int'(wearout_pos) < 2*D) worn[wearout_pos[$clog2(2*D)-1:0]] <= 1'b1;
    unique case (op)
      RHU_RESET: begin
        lrs     <= '0;
        ecp_lrs <= '0;
      end
      RHU_SET: begin
        for (int j = 0; j < 2*D; j++)
          if (bl[j] != wl[j] && !worn[j] && sel_pw == formed_pw) lrs[j] <= 1'b1;
        for (int p = 0; p < D; p++) begin
          int k;
          k = ecp_slot(p);
          if (k >= 0) begin
            ecp_lrs[2*k]   <= bl[2*p]   != wl[2*p];
            ecp_lrs[2*k+1] <= bl[2*p+1] != wl[2*p+1];
          end
        end
      end
      RHU_READ: begin
        int n;
        n = 0;
        for (int p = 0; p < D; p++) begin
          int k;
          k = ecp_slot(p);
          if (k >= 0) n += int'(ecp_lrs[2*k]) | int'(ecp_lrs[2*k+1]);
          else        n += int'(lrs[2*p]) | int'(lrs[2*p+1]);
        end
        i_out <= I_LRS_UA * real'(n);
      end
      RHU_REFORM: begin
        formed_pw <= pw;
        lrs       <= '0;
        worn      <= '0;
      end
      default: ;
    endcase
  end

endmodule
