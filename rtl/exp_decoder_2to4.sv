// exp_decoder_2to4: the 2-to-4 decoder of the FP-DAC exponent PGA.
//
// The exponent E1E0 of an activation selects one of four gain settings of the
// resistive programmable-gain amplifier behind the mantissa DAC. The decoder turns
// the binary exponent into a one-hot word, sel[E] = 1, so that exactly one gain
// switch is closed and the DAC output becomes 2^E times the mantissa voltage.
// Purely combinational. The decoder and its E1/E0 inputs are as drawn in the paper's
// FP-DAC figure; the bit order of sel is this design's choice.
module exp_decoder_2to4 (
  input  logic [1:0] e,
  output logic [3:0] sel
);
  always_comb begin
    sel    = '0;
    sel[e] = 1'b1;
  end
endmodule
