// fp_adc: one dynamic-range adaptive FP-ADC column, current in, E2M5 code out.
// Behavioural model: the analog front end is modelled (adc_frontend); the adaptive
// control, thermometer-to-binary encoder and mantissa register are synthesizable.
//
// Conversion. Adaptive phase: the column current is integrated; whenever V_O passes
// 2 V the adaptive control adds the next capacitor and V_O falls to 1 V, so after the
// sampling moment the held voltage V_M lies between 1 V and 2 V and the number of
// adjustments is the exponent. Readout phase: the shared ramp (1 V..2 V) and counter
// turn V_M into the 5-bit mantissa. The result is (V_M / 1 V) x 2^E in units of the
// current that brings V_O to 1 V at T_S with C1 alone.
//
// Interface: the phase strobes come from the control unit, count and vth_uv from the
// sharing unit. result is valid after the last readout step and held until the next
// reset phase. result.nz = 0 when the current was too small to reach 1 V; ovf = 1
// when V_O passed 2 V with all capacitors connected (then E = 3, M = 31).
// vo_uv is the modelled integrator output, for observation only.
// The sign bit of result is always 0. Zero flag and overflow are this design's
// choices.
module fp_adc
  import afpr_pkg::*;
#(
  parameter int unsigned GAIN_Q8 = 45
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        integ,
  input  logic        adapt_en,
  input  logic        read_en,
  input  logic        first,
  input  logic [4:0]  count,
  input  logic [31:0] vth_uv,
  input  logic [31:0] i_mac,
  output fp8_t        result,
  output logic        ovf,
  output logic [31:0] vo_uv
);
  logic [2:0]  therm;
  logic        comp;
  logic [1:0]  e;
  logic [4:0]  man;
  logic        below;

  adc_frontend #(.GAIN_Q8(GAIN_Q8)) u_fe (
    .clk    (clk),
    .rst_int(rst),
    .integ  (integ),
    .sw     (therm),
    .i_mac  (i_mac),
    .vth_uv (vth_uv),
    .comp   (comp),
    .vo_uv  (vo_uv)
  );

  adaptive_ctrl u_ctrl (
    .clk     (clk),
    .rst     (rst),
    .adapt_en(adapt_en),
    .comp    (comp),
    .therm   (therm),
    .ovf     (ovf)
  );

  therm2bin u_t2b (
    .therm(therm),
    .bin  (e)
  );

  mantissa_reg u_mreg (
    .clk    (clk),
    .rst    (rst),
    .read_en(read_en),
    .first  (first),
    .comp   (comp),
    .count  (count),
    .man    (man),
    .below  (below)
  );

  always_comb begin
    result      = FP_ZERO;
    result.nz   = !below;
    result.e    = below ? 2'd0 : e;
    result.m    = below ? 5'd0 : man;
  end
endmodule
