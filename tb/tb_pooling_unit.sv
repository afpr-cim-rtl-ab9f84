// tb_pooling_unit: windows of 1, 2, 4 and 9 random signed vectors; each output vector
// must be the element-wise maximum (real arithmetic) of its window and appear once per
// window.
module tb_pooling_unit;
  import afpr_pkg::*;
  int checks = 0, failures = 0;
  localparam int C = 32;
  logic clk = 0, rst_n, in_valid, out_valid;
  logic [3:0] win;
  fp8_t din [C];
  fp8_t dout [C];
  real mx [C];

  pooling_unit #(.COLS(C)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .win(win),
    .din(din), .out_valid(out_valid), .dout(dout));

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real val(fp8_t x);
    real v;
    if (!x.nz) return 0.0;
    v = (1.0 + x.m / 32.0) * (2.0 ** x.e);
    return x.sign ? -v : v;
  endfunction

  int wins [4] = '{1, 2, 4, 9};

  initial begin
    rst_n = 0; in_valid = 0; win = 1;
    for (int c = 0; c < C; c++) din[c] = FP_ZERO;
    #12 rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int w;
      w = wins[t % 4];
      win = 4'(w);
      for (int p = 0; p < w; p++) begin
        @(negedge clk);
        for (int c = 0; c < C; c++) begin
          din[c] = fp8_t'(9'($urandom));
          if (p == 0 || val(din[c]) > mx[c]) mx[c] = val(din[c]);
        end
        in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (out_valid !== (p == w - 1)) begin failures++; $display("FAIL out_valid w=%0d p=%0d", w, p); end
      end
      for (int c = 0; c < C; c++) begin
        checks++;
        if (val(dout[c]) != mx[c]) begin
          failures++;
          $display("FAIL w=%0d c=%0d got %f expected %f", w, c, val(dout[c]), mx[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
