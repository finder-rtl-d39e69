// adc: behavioural model of the bank's 8-bit ADC. This is a model of an
// analog converter, not synthesizable logic.
//
// The ADC converts the RHU current held by the TIA into the digital Hamming
// distance hd. One LSB equals one LRS read current, so the code is the
// current divided by I_LRS_UA, rounded to the nearest integer and limited
// to 0..255. A conversion started by 'convert' delivers its code on 'code'
// after the next clock edge, one pipeline cycle, as in the paper's stage 4
// (an 8-bit converter run at 128 MS/s, fast enough for the 100 MHz pipeline).
module adc #(
  parameter real I_LRS_UA = 500.0
) (
  input  logic       clk,
  input  logic       convert,
  input  real        i_in,      // uA
  output logic [7:0] code
);

  function automatic logic [7:0] quantise(input real i);
    real steps;
    steps = i / I_LRS_UA + 0.5;
    if (steps < 1.0)   return 8'd0;
    if (steps >= 255.0) return 8'd255;
    return 8'(int'($floor(steps)));
  endfunction

  initial code = '0;

  always @(posedge clk)
    if (convert) code <= quantise(i_in);

endmodule
