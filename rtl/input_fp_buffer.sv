// input_fp_buffer: the macro's input FP data buffer.
//
// Holds one FP8 (E2M5) activation per crossbar row and drives all of them in parallel to
// the row FP-DACs. Words are written one row per clock (wr_en, wr_row, wr_data) and
// appear on act[] after that edge. Reset clears every entry to zero so that rows never
// written drive no current. The paper only names this buffer; interface and reset are
// this design's.
module input_fp_buffer
  import afpr_pkg::*;
#(
  parameter int ROWS = 576
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  fp8_t                    wr_data,
  output fp8_t                    act [ROWS]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) act[r] <= FP_ZERO;
    end else if (wr_en) begin
      act[wr_row] <= wr_data;
    end
  end
endmodule
