// finder_pkg: types and constants shared by the FindeR FM-Index search
// accelerator. DNA symbols use the 2-bit code A=00, C=01, G=10, T=11 given
// for the Hamming distance unit. FM-Index positions and markers are 32 bits
// wide, as the markers are. An LFM request asks a bank pipeline for
// Count(sym)+Occ(sym,pos) in one of the two FM-Indexes (dir 0: the BWT of
// the reference, dir 1: the BWT of its reverse). The tag is carried through
// the pipeline unchanged; the scheduler packs {context, is_high} into it.
package finder_pkg;

  localparam int unsigned POS_W  = 32;  // positions and markers
  localparam int unsigned MAR_W  = 32;  // one marker per symbol
  localparam int unsigned TAG_W  = 8;   // request tag carried by a bank pipeline

  typedef enum logic [1:0] {SYM_A = 2'b00, SYM_C = 2'b01, SYM_G = 2'b10, SYM_T = 2'b11} sym_t;

  // Operations on one RHU crossbar.
  typedef enum logic [2:0] {
    RHU_NOP    = 3'd0,
    RHU_RESET  = 3'd1,  // all working-diagonal cells to HRS
    RHU_SET    = 3'd2,  // SET cells whose WL and BL voltages differ
    RHU_READ   = 3'd3,  // sense the summed current of the working pair
    RHU_REFORM = 3'd4   // BREAK the working pair, FORM the pair named by pw
  } rhu_op_t;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic             dir;      // 0: forward BWT, 1: reverse BWT
    logic [POS_W-1:0] pos;      // low or high pointer
    sym_t             sym;      // read symbol Q[i]
    logic             keep_sa;  // low request of a coalesced pair
    logic             from_sa;  // high request of a coalesced pair
  } lfm_req_t;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [POS_W-1:0] value;    // Count(sym)+Occ(sym,pos)
  } lfm_resp_t;

endpackage
