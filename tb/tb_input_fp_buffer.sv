// tb_input_fp_buffer: reset clears all 576 entries to zero; random writes land in the
// addressed row only and all rows are visible in parallel.
module tb_input_fp_buffer;
  import afpr_pkg::*;
  int checks = 0, failures = 0;
  localparam int R = 576;
  logic clk = 0, rst_n, wr_en;
  logic [$clog2(R)-1:0] wr_row;
  fp8_t wr_data;
  fp8_t act [R];
  logic [8:0] model [R];

  input_fp_buffer #(.ROWS(R)) dut (.clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_row(wr_row),
    .wr_data(wr_data), .act(act));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all(string tag);
    int bad = 0;
    for (int r = 0; r < R; r++) if (9'(act[r]) != model[r]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d rows differ", tag, bad); end
  endtask

  initial begin
    rst_n = 0; wr_en = 0; wr_row = 0; wr_data = FP_ZERO;
    #12 rst_n = 1;
    for (int r = 0; r < R; r++) model[r] = 0;
    compare_all("reset");
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      wr_en = ($urandom_range(0, 3) != 0);
      wr_row = $clog2(R)'($urandom_range(0, R - 1));
      wr_data = fp8_t'(9'($urandom));
      @(posedge clk); #1;
      if (wr_en) model[wr_row] = 9'(wr_data);
      if (i % 100 == 99) compare_all("writes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
