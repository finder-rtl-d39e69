// lut_adder_stage: pipeline stage 5 of a FindeR bank, marker + d - hd.
//
// A 32-bit subtraction is done as four byte lookups on 8-bit LUT adders,
// least significant byte first, the borrow (Cout) of one lookup feeding Cin
// of the next. Four LUT adders are chained so that a new operation can
// start every cycle: adder k handles byte k of the operation that entered
// k cycles earlier. The upper bytes of the operands wait in registers until
// their adder's turn. The result leaves 4 cycles after it enters.
//
// mar is the stored marker (already Count+Occ+d), hd the 8-bit Hamming
// distance from the ADC, zero-extended to 32 bits as operand B. The four
// adders hold identical tables and are written together through the
// prog_* broadcast port (this design's choice).
module lut_adder_stage
  import finder_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             prog_en,
  input  logic [16:0]      prog_addr,
  input  logic [8:0]       prog_data,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  logic [MAR_W-1:0] mar,
  input  logic [7:0]       hd,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output logic [MAR_W-1:0] result
);

  // Operand and partial-result registers between the lookups.
  logic [3:0]             v_q;
  logic [3:0][TAG_W-1:0]  tag_q;
  logic [3:0][MAR_W-1:0]  a_q;      // marker, consumed byte by byte
  logic [3:0][MAR_W-1:0]  b_q;      // zero-extended hd
  logic [3:0][MAR_W-1:0]  res_q;    // bytes produced so far
  logic [3:0][7:0]        o;
  logic [3:0]             cout;

  for (genvar k = 0; k < 4; k++) begin : g_add
    logic [7:0] a_byte, b_byte;
    logic       cin;
    if (k == 0) begin : g_first
      assign a_byte = mar[7:0];
      assign b_byte = hd;
      assign cin    = 1'b0;
    end else begin : g_next
      assign a_byte = a_q[k-1][8*k +: 8];
      assign b_byte = b_q[k-1][8*k +: 8];
      assign cin    = cout[k-1];
    end
    lut_adder8 u_lut (
      .clk, .prog_en, .prog_addr, .prog_data,
      .rd_en(k == 0 ? in_valid : v_q[k-1]),
      .a(a_byte), .b(b_byte), .cin,
      .o(o[k]), .cout(cout[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '0;
    end else begin
      v_q <= {v_q[2:0], in_valid};
    end
  end

  always_ff @(posedge clk) begin
    tag_q[0] <= in_tag;
    a_q[0]   <= mar;
    b_q[0]   <= {{(MAR_W-8){1'b0}}, hd};
    for (int k = 1; k < 4; k++) begin
      tag_q[k] <= tag_q[k-1];
      a_q[k]   <= a_q[k-1];
      b_q[k]   <= b_q[k-1];
    end
  end

  // res_q[k] collects the bytes 0..k-1 that are already known when the
  // lookup of byte k completes.
  always_ff @(posedge clk) begin
    res_q[0] <= '0;
    for (int k = 1; k < 4; k++) begin
      res_q[k]          <= res_q[k-1];
      res_q[k][8*(k-1) +: 8] <= o[k-1];
    end
  end

  assign out_valid = v_q[3];
  assign out_tag   = tag_q[3];
  always_comb begin
    result          = res_q[3];
    result[31:24]   = o[3];
  end

endmodule
