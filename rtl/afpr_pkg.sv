// afpr_pkg: types, constants and number-format helpers shared by the AFPR-CIM RTL.
//
// Number format. Activations and results are FP8 words in the E2M5 layout: a sign,
// a 2-bit exponent E and a 5-bit mantissa M with an implicit leading one, value
// (1 + M/32) * 2^E, i.e. 1.0 .. 15.75. E2M5 with an implicit one has no code for zero,
// while the ADC can return "not read out" for a current too small to reach 1 V. The
// word therefore carries one more bit, nz (non-zero); nz = 0 means the value 0.
// The sign bit and the nz flag are this design's additions; the paper names the
// format FP8 (E2M5) and gives exponent and mantissa only.
//
// Fixed-point view. The digital back end adds results in fixed point, with 1.0 = 32
// (units of 1/32): an E2M5 word is worth (32 + M) << E, from 32 to 504.
//
// Analog constants (voltages in microvolts) of the FP-ADC (the clamp voltage V_r is 0):
// threshold V_th1 = 2 V, readout ramp from 1 V in 32 steps of 1/32 V.
package afpr_pkg;

  localparam int EXP_BITS = 2;
  localparam int MAN_BITS = 5;
  localparam int FX_ONE   = 32;             // 1.0 in fixed-point units
  localparam int FX_MAX   = 504;            // 1.96875 * 8, largest E2M5 magnitude

  localparam int unsigned VTH_UV       = 2_000_000;
  localparam int unsigned RAMP_BASE_UV = 1_000_000;
  localparam int unsigned RAMP_STEP_UV = 31_250;

  typedef struct packed {
    logic                nz;    // 0: value is zero / not read out
    logic                sign;  // 1: negative (digital domain only)
    logic [EXP_BITS-1:0] e;
    logic [MAN_BITS-1:0] m;
  } fp8_t;

  typedef enum logic [1:0] {
    ACT_BYPASS = 2'd0,
    ACT_RELU   = 2'd1,
    ACT_RELU6  = 2'd2
  } act_mode_e;

  localparam fp8_t FP_ZERO = '{nz: 1'b0, sign: 1'b0, e: '0, m: '0};

  // Magnitude in fixed-point units, 0 for a zero word.
  function automatic logic [8:0] fp_mag(fp8_t x);
    logic [8:0] v;
    v = {3'b000, 1'b1, x.m} << x.e;
    return x.nz ? v : 9'd0;
  endfunction

  // Signed fixed-point value of a word.
  function automatic logic signed [15:0] fp_to_fx(fp8_t x);
    logic signed [15:0] v;
    v = $signed({7'b0, fp_mag(x)});
    return x.sign ? -v : v;
  endfunction

  // Fixed point to FP8: truncates the mantissa, flushes |v| < 1.0 to zero and
  // saturates |v| above 15.75 to 1.11111 x 2^3.
  function automatic fp8_t fx_to_fp(logic signed [15:0] v);
    fp8_t             r;
    logic      [15:0] mag;
    r   = FP_ZERO;
    mag = v[15] ? 16'(-v) : 16'(v);
    if (mag >= 16'(FX_ONE)) begin
      r.nz   = 1'b1;
      r.sign = v[15];
      if (mag > 16'(FX_MAX)) begin
        r.e = 2'd3;
        r.m = 5'd31;
      end else if (mag >= 16'd256) begin
        r.e = 2'd3;
        r.m = 5'(mag[7:3]);
      end else if (mag >= 16'd128) begin
        r.e = 2'd2;
        r.m = 5'(mag[6:2]);
      end else if (mag >= 16'd64) begin
        r.e = 2'd1;
        r.m = 5'(mag[5:1]);
      end else begin
        r.e = 2'd0;
        r.m = 5'(mag[4:0]);
      end
    end
    return r;
  endfunction

endpackage
