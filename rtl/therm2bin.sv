// therm2bin: thermometer-to-binary encoder of the FP-ADC exponent.
//
// The adaptive control closes the capacitor switches sw1, sw2, sw3 one after another,
// so their states form a thermometer code. The number of closed switches is the
// number of range adjustments, and that number is the 2-bit exponent of the
// converted value (000 -> 0, 001 -> 1, 011 -> 2, 111 -> 3). The encoder counts the
// ones, so a malformed code still gives the number of closed switches.
// Combinational. Function from the paper; the count-of-ones form is this design's.
module therm2bin (
  input  logic [2:0] therm,
  output logic [1:0] bin
);
  always_comb bin = 2'(therm[0]) + 2'(therm[1]) + 2'(therm[2]);
endmodule
