// activation_unit: element-wise activation of the back end.
//
// Applies one of three functions to each FP8 word of a COLS-wide vector: bypass, ReLU
// (negative values become zero) or ReLU6 (ReLU, then values above 6.0 = 1.10000 x 2^2
// are clamped to 6.0). ReLU and ReLU6 are the activations of the ResNet and MobileNetV2
// networks the architecture is evaluated on; the paper only names an activation stage,
// so the choice of functions is this design's. n_relu and n_clip count the words that
// were zeroed and clamped in the last vector.
//
// Timing: one register stage; out_valid follows in_valid one clock later.
module activation_unit
  import afpr_pkg::*;
#(
  parameter int COLS = 256
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  act_mode_e mode,
  input  fp8_t      din [COLS],
  output logic      out_valid,
  output fp8_t      dout [COLS],
  output logic [$clog2(COLS+1)-1:0] n_relu,
  output logic [$clog2(COLS+1)-1:0] n_clip
);
  localparam fp8_t SIX = '{nz: 1'b1, sign: 1'b0, e: 2'd2, m: 5'd16};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      n_relu    <= '0;
      n_clip    <= '0;
      for (int c = 0; c < COLS; c++) dout[c] <= FP_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        logic [$clog2(COLS+1)-1:0] nr, nc;
        fp8_t                      y;
        nr = '0;
        nc = '0;
        for (int c = 0; c < COLS; c++) begin
          y = din[c];
          if (mode != ACT_BYPASS && din[c].nz && din[c].sign) begin
            y  = FP_ZERO;
            nr = nr + 1'b1;
          end else if (mode == ACT_RELU6 && din[c].nz && fp_mag(din[c]) > fp_mag(SIX)) begin
            y  = SIX;
            nc = nc + 1'b1;
          end
          dout[c] <= y;
        end
        n_relu <= nr;
        n_clip <= nc;
      end
    end
  end
endmodule
