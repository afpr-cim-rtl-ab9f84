// tb_activation_unit: random signed FP8 vectors through bypass, ReLU and ReLU6; expected
// values computed with real arithmetic (max(0, x), min(6, max(0, x))); the zeroed and
// clamped counts are checked too.
module tb_activation_unit;
  import afpr_pkg::*;
  int checks = 0, failures = 0;
  localparam int C = 64;
  logic clk = 0, rst_n, in_valid, out_valid;
  act_mode_e mode;
  fp8_t din [C];
  fp8_t dout [C];
  logic [$clog2(C+1)-1:0] n_relu, n_clip;

  activation_unit #(.COLS(C)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .mode(mode),
    .din(din), .out_valid(out_valid), .dout(dout), .n_relu(n_relu), .n_clip(n_clip));

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

  initial begin
    rst_n = 0; in_valid = 0; mode = ACT_BYPASS;
    for (int c = 0; c < C; c++) din[c] = FP_ZERO;
    #12 rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int er, ec;
      @(negedge clk);
      mode = act_mode_e'(t % 3);
      for (int c = 0; c < C; c++) din[c] = fp8_t'(9'($urandom));
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      er = 0; ec = 0;
      for (int c = 0; c < C; c++) begin
        real x, y;
        x = val(din[c]);
        y = x;
        if (mode != ACT_BYPASS && x < 0) begin y = 0.0; er++; end
        else if (mode == ACT_RELU6 && x > 6.0) begin y = 6.0; ec++; end
        checks++;
        if (val(dout[c]) != y || (y == 0.0 && dout[c].nz)) begin
          failures++;
          $display("FAIL mode %0d c=%0d x=%f got %f", mode, c, x, val(dout[c]));
        end
      end
      checks++;
      if (int'(n_relu) != er || int'(n_clip) != ec || !out_valid) begin
        failures++;
        $display("FAIL counts %0d %0d expected %0d %0d", n_relu, n_clip, er, ec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
