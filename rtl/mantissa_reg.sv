// mantissa_reg: 5-bit mantissa register of the single-slope readout.
//
// After the sampling moment T_S the integrator holds V_M, and the shared ramp climbs
// from 1 V to 2 V in 32 steps while the shared counter counts 0..31. The comparator
// is high while V_M is above the ramp. At the first step where it is low the ramp has
// reached V_M, and this register latches the count: the mantissa is the smallest k
// with 1 V + k/32 V >= V_M. That rule reproduces the paper's example, where
// V_M = 1.271 V reads as 01001.
//
// If the comparator is already low at the first step, V_M did not reach 1 V: in the
// paper's words the result "is not read out", and 'below' is set. If the ramp never
// reaches V_M the register keeps its reset value 11111 (saturation, this design's
// choice). Timing: rst clears it in the reset phase; capture is at the rising edge
// that ends the ramp step; man is stable after the last readout step.
module mantissa_reg (
  input  logic       clk,
  input  logic       rst,
  input  logic       read_en,
  input  logic       first,
  input  logic       comp,
  input  logic [4:0] count,
  output logic [4:0] man,
  output logic       below
);
  logic captured;

  always_ff @(posedge clk) begin
    if (rst) begin
      man      <= '1;
      captured <= 1'b0;
      below    <= 1'b0;
    end else if (read_en && !captured && !comp) begin
      man      <= count;
      captured <= 1'b1;
      below    <= first;
    end
  end
endmodule
