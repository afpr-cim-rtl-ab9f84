// vth_ramp_gen: behavioural model of the column-shared V_th and ramp generator.
// This is a behavioural model of an analog reference; voltages are integers in uV.
//
// In the adaptive phase it holds the threshold V_th1 = 2 V at which the FP-ADC widens
// its range. In the readout phase it drops to 1 V and rises by 1/32 V per counter
// step, following the shared counter, so that ramp(k) = 1 V + k x 31.25 mV is the
// voltage whose mantissa code is k. The 2 V and 1 V levels are the paper's; the step
// size follows from the 5-bit counter and the paper's ideal voltage of 1.28 V for
// mantissa 01001. Combinational.
module vth_ramp_gen
  import afpr_pkg::*;
(
  input  logic        ramp_en,
  input  logic [4:0]  count,
  output logic [31:0] vth_uv
);
  always_comb vth_uv = ramp_en ? RAMP_BASE_UV + 32'(count) * RAMP_STEP_UV : VTH_UV;
endmodule
