// fm_index_mem: pipeline stage 2 of a FindeR bank, the FM-Index data arrays.
//
// One entry is one bucket of the table-based FM-Index: d BWT symbols of
// 2 bits (symbol j in bits 2j+1:2j) and four 32-bit markers, one per symbol
// (A in the lowest 32 bits). As in the paper, the markers already include
// Count(s) and the bucket width d: marker[s] = Count(s) + Occ(s, b*d) + d
// for bucket b. Both FM-Indexes of the bi-directional search are held here;
// the top address bit selects the one of the reversed reference, and each
// direction has an array of its own.
//
// A read moves the addressed bucket into the sense-amplifier latch, which
// drives 'bucket' from the next cycle on (one pipeline cycle). When the
// scheduler finds the low and high pointers of a search in the same bucket
// it marks the low request keep_sa and the high request from_sa: the high
// request then takes the bucket straight from the latch without an array
// read, which saves the read energy but not latency. array_read and sa_hit
// pulse for each kind of access. The write port loads the index.
module fm_index_mem
  import finder_pkg::*;
#(
  parameter int unsigned D  = 128,
  parameter int unsigned AW = 26,   // {dir, bucket index}
  localparam int unsigned BW = 2*D + 4*MAR_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [BW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  input  logic          keep_sa,
  input  logic          from_sa,
  output logic [BW-1:0] bucket,
  output logic          array_read,
  output logic          sa_hit
);

  // One array per direction (forward and reverse FM-Index).
  logic [BW-1:0] cells_fwd [0:(2**(AW-1))-1];
  logic [BW-1:0] cells_rev [0:(2**(AW-1))-1];
  logic [BW-1:0] sa_q;
  logic          kept_q;   // the last array read was a keep_sa read

  always_ff @(posedge clk) begin
    if (wr_en && !wr_addr[AW-1]) cells_fwd[wr_addr[AW-2:0]] <= wr_data;
    if (wr_en &&  wr_addr[AW-1]) cells_rev[wr_addr[AW-2:0]] <= wr_data;
    if (rd_en && !from_sa)
      sa_q <= rd_addr[AW-1] ? cells_rev[rd_addr[AW-2:0]] : cells_fwd[rd_addr[AW-2:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kept_q     <= 1'b0;
      array_read <= 1'b0;
      sa_hit     <= 1'b0;
    end else begin
      array_read <= rd_en && !from_sa;
      sa_hit     <= rd_en && from_sa;
      if (rd_en) kept_q <= keep_sa && !from_sa;
    end
  end

  assign bucket = sa_q;

  // A from_sa read must follow the keep_sa read of the same pair.
  a_from_sa_after_keep: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en && from_sa |-> kept_q);

endmodule
