// tb_output_fp_buffer: a loaded vector is held until the next load and is readable word
// by word; valid rises with the first load.
module tb_output_fp_buffer;
  import afpr_pkg::*;
  int checks = 0, failures = 0;
  localparam int C = 256;
  logic clk = 0, rst_n, load, valid;
  fp8_t din [C];
  fp8_t vec [C];
  fp8_t rd_data;
  logic [$clog2(C)-1:0] rd_addr;
  logic [8:0] model [C];

  output_fp_buffer #(.COLS(C)) dut (.clk(clk), .rst_n(rst_n), .load(load), .din(din),
    .rd_addr(rd_addr), .rd_data(rd_data), .vec(vec), .valid(valid));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; load = 0; rd_addr = 0;
    for (int c = 0; c < C; c++) din[c] = FP_ZERO;
    #12 rst_n = 1;
    checks++;
    if (valid) begin failures++; $display("FAIL valid after reset"); end
    for (int v = 0; v < 4; v++) begin
      @(negedge clk);
      for (int c = 0; c < C; c++) begin
        model[c] = 9'($urandom);
        din[c] = fp8_t'(model[c]);
      end
      load = 1;
      @(negedge clk);
      load = 0;
      for (int c = 0; c < C; c++) din[c] = fp8_t'(9'($urandom));   // must not be taken
      @(negedge clk);
      checks++;
      if (!valid) begin failures++; $display("FAIL valid"); end
      for (int c = 0; c < C; c += 17) begin
        rd_addr = $clog2(C)'(c);
        #1;
        checks++;
        if (9'(rd_data) != model[c] || 9'(vec[c]) != model[c]) begin
          failures++;
          $display("FAIL word %0d", c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
