// partial_accumulator: inter-macro adder for partial sums (the "inter-core routing
// adder").
//
// A weight matrix taller than the 576 rows of one macro is split over several macros;
// each macro's column then holds a partial sum, and the back end adds the partial sums
// of the same column. The adder takes the NMACRO x COLS E2M5 results, converts each to
// fixed point ((32 + M) << E, zero for nz = 0), adds those of the macros selected by
// mask (subtracting where neg is set, so that negative weights can be held on a macro
// of their own), shifts the sum right by shift (a per-layer scale, division by 2^shift
// toward zero) and re-encodes it as FP8 with truncation, flush to zero below 1.0 and saturation above 15.75 (sat set).
// The summing function is the paper's; the mask, subtraction, scale and rounding are
// this design's choices.
//
// Timing: one register stage. out_valid follows in_valid one clock later.
module partial_accumulator
  import afpr_pkg::*;
#(
  parameter int NMACRO = 4,
  parameter int COLS   = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  fp8_t              din [NMACRO][COLS],
  input  logic [NMACRO-1:0] mask,
  input  logic [NMACRO-1:0] neg,
  input  logic [1:0]        shift,
  output logic              out_valid,
  output fp8_t              dout [COLS],
  output logic              sat
);
  fp8_t nxt   [COLS];
  logic nxt_sat;

  // combinational sum, scale and re-encoding of every column
  always_comb begin
    nxt_sat = 1'b0;
    for (int c = 0; c < COLS; c++) begin
      logic signed [15:0] sum;
      sum = '0;
      for (int k = 0; k < NMACRO; k++) begin
        if (mask[k]) sum = neg[k] ? sum - fp_to_fx(din[k][c]) : sum + fp_to_fx(din[k][c]);
      end
      sum = sum[15] ? -((-sum) >>> shift) : sum >>> shift;
      if (sum > 16'sd504 || sum < -16'sd504) nxt_sat = 1'b1;
      nxt[c] = fx_to_fp(sum);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sat       <= 1'b0;
      for (int c = 0; c < COLS; c++) dout[c] <= FP_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        dout <= nxt;
        sat  <= nxt_sat;
      end
    end
  end
endmodule
