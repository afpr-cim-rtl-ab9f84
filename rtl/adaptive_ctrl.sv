// adaptive_ctrl: adaptive control module of the dynamic-range adaptive FP-ADC.
//
// Three flip-flops in a chain drive the capacitor switches sw1..sw3. Each time the
// comparator reports that the integrator output V_O has reached V_th1 = 2 V during
// the adaptive phase, the next flip-flop is set, the next capacitor (C2 = C_int,
// C3 = 2 C_int, C4 = 4 C_int) joins C1 and the shared charge halves V_O back to 1 V.
// The chain state is a thermometer code whose count of ones is the exponent.
// If the comparator fires again with all three switches closed, the range of the
// converter is exceeded and ovf is set.
//
// Timing: rst (the reset phase) clears the chain. The comparator is sampled at each
// rising clock edge while adapt_en is high, so at most one switch closes per clock.
// In the paper's schematic the comparator output clocks the flip-flops directly; here
// the design is synchronous and the comparator is an enable. Gating with adapt_en
// keeps the comparator toggles of the readout phase from moving the chain. The
// overflow flag is this design's addition.
module adaptive_ctrl (
  input  logic       clk,
  input  logic       rst,
  input  logic       adapt_en,
  input  logic       comp,
  output logic [2:0] therm,
  output logic       ovf
);
  always_ff @(posedge clk) begin
    if (rst) begin
      therm <= '0;
      ovf   <= 1'b0;
    end else if (adapt_en && comp) begin
      if (therm[2]) ovf   <= 1'b1;
      else          therm <= {therm[1:0], 1'b1};
    end
  end
endmodule
