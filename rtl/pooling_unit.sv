// pooling_unit: max pooling over consecutive result vectors.
//
// In the mapping used here, one macro operation yields all output channels (the
// crossbar columns) of one output position. A pooling window is therefore formed by
// issuing its positions one after another: the unit keeps, per channel, the largest
// value seen since the window began and emits the window's maximum after win vectors.
// win = 1 passes every vector through. Values are compared as signed numbers. The paper
// only names a pooling stage; max pooling and the position order are this design's.
//
// Timing: out_valid pulses one clock after the last vector of a window is accepted.
// win is sampled when a window starts (win = 0 is treated as 1).
module pooling_unit
  import afpr_pkg::*;
#(
  parameter int COLS = 256
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [3:0] win,
  input  fp8_t       din [COLS],
  output logic       out_valid,
  output fp8_t       dout [COLS]
);
  fp8_t       acc [COLS];
  logic [3:0] cnt;
  logic [3:0] win_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      cnt       <= '0;
      win_q     <= 4'd1;
      for (int c = 0; c < COLS; c++) begin
        acc[c]  <= FP_ZERO;
        dout[c] <= FP_ZERO;
      end
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        logic [3:0] w;
        fp8_t       mx;
        w = (cnt == '0) ? ((win == '0) ? 4'd1 : win) : win_q;
        if (cnt == '0) win_q <= w;
        for (int c = 0; c < COLS; c++) begin
          mx = din[c];
          if (cnt != '0 && fp_to_fx(acc[c]) > fp_to_fx(din[c])) mx = acc[c];
          acc[c] <= mx;
          if (cnt == w - 1'b1) dout[c] <= mx;
        end
        if (cnt == w - 1'b1) begin
          out_valid <= 1'b1;
          cnt       <= '0;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
