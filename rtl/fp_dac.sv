// fp_dac: behavioural model of one row's FP-DAC (mantissa DAC + exponent PGA).
// This is a behavioural model of analog circuitry; the 2-to-4 exponent decoder inside
// it is synthesizable (exp_decoder_2to4).
//
// The shared resistor ladder provides the reference levels; the mantissa switch tree,
// steered by the 5 mantissa bits M4..M0, connects the level 1.M (with the implicit
// leading one) to the PGA input as M_analog. The exponent bits E1E0 are decoded to one
// hot and close one of the PGA's gain switches, giving a gain of 2^E, so the row
// voltage is V_DAC = 2^E x M_analog. Voltages are integers in units of one DAC step
// (1/32 of the 1.0 level): v_dac = (32 + M) << E, 32..504.
//
// The implicit one is read from the paper's FP-DAC linearity plot, where the cell
// current at M = 1 and M = 31 differs by about the factor (32+31)/(32+1). A zero word
// (nz = 0) leaves the row at V_r, i.e. drives no current; the sign bit is not used,
// since the analog path computes with non-negative activations. Both are this design's
// choices. Combinational.
module fp_dac
  import afpr_pkg::*;
(
  input  fp8_t       din,
  output logic [8:0] v_dac
);
  logic [3:0] gain_sel;
  logic [8:0] m_analog;

  exp_decoder_2to4 u_dec (
    .e  (din.e),
    .sel(gain_sel)
  );

  always_comb begin
    m_analog = {3'b000, 1'b1, din.m};
    unique case (gain_sel)
      4'b0001: v_dac = m_analog;
      4'b0010: v_dac = m_analog << 1;
      4'b0100: v_dac = m_analog << 2;
      4'b1000: v_dac = m_analog << 3;
      default: v_dac = '0;
    endcase
    if (!din.nz) v_dac = '0;
  end
endmodule
