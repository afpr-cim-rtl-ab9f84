// output_fp_buffer: the output FP data buffer at the end of the digital back end.
//
// Captures a COLS-wide FP8 vector when load is high and keeps it until the next load;
// vec shows the whole vector, rd_data the word at rd_addr (combinational read). valid
// rises with the first load. The paper only names the buffer; its interface is this
// design's.
module output_fp_buffer
  import afpr_pkg::*;
#(
  parameter int COLS = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  fp8_t                    din [COLS],
  input  logic [$clog2(COLS)-1:0] rd_addr,
  output fp8_t                    rd_data,
  output fp8_t                    vec [COLS],
  output logic                    valid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      for (int c = 0; c < COLS; c++) vec[c] <= FP_ZERO;
    end else if (load) begin
      valid <= 1'b1;
      vec   <= din;
    end
  end

  always_comb rd_data = vec[rd_addr];
endmodule
