// lut_adder8: one ReRAM array used as an 8-bit lookup-table adder.
//
// The array has 256 rows and 2x256 column groups of 9 bits. Operand A
// selects the row (word line); Cin selects the half of the columns and
// operand B the 9-bit column group inside it, so the entry address is
// {A, Cin, B} and the array holds 131072 words of 9 bits (0.14 MB). A word is
// {Cout, O[7:0]}. The array computes nothing itself: the function is the
// table written into it. FindeR programs it with the subtraction table
// {Cout,O} = A - B - Cin (Cout is the borrow out), which lets the pipeline
// compute marker + d - hd; this use of Cin/Cout as borrow is this design's
// reading of the paper, which only says the table stores A minus B.
//
// Interface: prog_en writes prog_data at prog_addr. rd_en starts a lookup;
// o and cout are valid on the next cycle (one pipeline cycle per lookup,
// as in the paper) and hold their value until the next lookup.
module lut_adder8 (
  input  logic        clk,
  input  logic        prog_en,
  input  logic [16:0] prog_addr,
  input  logic [8:0]  prog_data,
  input  logic        rd_en,
  input  logic [7:0]  a,
  input  logic [7:0]  b,
  input  logic        cin,
  output logic [7:0]  o,
  output logic        cout
);

  logic [8:0] cells [0:131071];
  logic [8:0] word_q;

  always_ff @(posedge clk) begin
    if (prog_en) cells[prog_addr] <= prog_data;
    if (rd_en)   word_q <= cells[{a, cin, b}];
  end

  assign {cout, o} = word_q;

endmodule
