// tb_partial_accumulator: random E2M5 inputs from four macros with random enable masks,
// subtract flags and scale shifts. The expected word is computed with real arithmetic:
// sum of the selected values (1 + M/32) x 2^E with their signs, divided by 2^shift, then
// encoded with truncation toward zero, flush below 1.0 and saturation above 15.75.
module tb_partial_accumulator;
  import afpr_pkg::*;
  int checks = 0, failures = 0;
  localparam int NM = 4, C = 32;
  logic clk = 0, rst_n, in_valid, out_valid, sat;
  fp8_t din [NM][C];
  fp8_t dout [C];
  logic [NM-1:0] mask, neg;
  logic [1:0] shift;
  int n_sat = 0, n_neg = 0, n_zero = 0;

  partial_accumulator #(.NMACRO(NM), .COLS(C)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .din(din), .mask(mask), .neg(neg), .shift(shift), .out_valid(out_valid), .dout(dout), .sat(sat));

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

  // expected encoding of a real value
  function automatic fp8_t enc(real r);
    fp8_t y;
    real a;
    int e;
    y = FP_ZERO;
    a = (r < 0) ? -r : r;
    if (a < 1.0) return y;
    y.nz = 1; y.sign = (r < 0);
    if (a >= 16.0 || a > 15.75) begin y.e = 3; y.m = 31; return y; end
    e = (a >= 8.0) ? 3 : (a >= 4.0) ? 2 : (a >= 2.0) ? 1 : 0;
    y.e = 2'(e);
    y.m = 5'($floor((a / (2.0 ** e) - 1.0) * 32.0));
    return y;
  endfunction

  initial begin
    rst_n = 0; in_valid = 0; mask = 0; neg = 0; shift = 0;
    for (int k = 0; k < NM; k++) for (int c = 0; c < C; c++) din[k][c] = FP_ZERO;
    #12 rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      bit any_sat;
      real s;
      @(negedge clk);
      mask = NM'($urandom_range(1, 15));
      neg = (t % 3 == 0) ? NM'($urandom) : '0;
      shift = 2'($urandom);
      for (int k = 0; k < NM; k++)
        for (int c = 0; c < C; c++) begin
          din[k][c] = fp8_t'(9'($urandom));
          din[k][c].sign = 1'b0;
          if ($urandom_range(0, 9) == 0) din[k][c].nz = 1'b0;
        end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid"); end
      any_sat = 0;
      for (int c = 0; c < C; c++) begin
        fp8_t ex;
        s = 0.0;
        for (int k = 0; k < NM; k++) if (mask[k]) s += neg[k] ? -val(din[k][c]) : val(din[k][c]);
        s = s / (2.0 ** shift);
        if (s > 15.75 || s < -15.75) begin any_sat = 1; n_sat++; end
        ex = enc(s);
        if (ex.nz && ex.sign) n_neg++;
        if (!ex.nz) n_zero++;
        checks++;
        if (dout[c] !== ex) begin
          failures++;
          $display("FAIL t=%0d c=%0d sum=%f got %b expected %b", t, c, s, dout[c], ex);
        end
      end
      checks++;
      if (sat !== any_sat) begin failures++; $display("FAIL sat flag"); end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid stays"); end
    end
    checks++;
    if (n_sat == 0 || n_neg == 0 || n_zero == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
