// tb_conv_layer_mapping: a convolution layer mapped onto the four default-size macros in
// the way the architecture maps network layers. A 3 x 3 kernel over 128 input channels
// with 256 output channels is unrolled to a (128 x 3 x 3) x 256 = 1152 x 256 weight
// matrix: row r = c1*9 + ky*3 + kx, column = output channel. 1152 rows exceed one macro,
// so rows 0..575 go to macro 0 and rows 576..1151 to macro 1, and each column of a macro
// yields a partial sum that the accumulator adds. Weights are signed (-31..31, with a per-channel bias
// of -8..+7 so that outputs of both signs and all sizes occur): the
// positive part is programmed into macros 0/1 and the negative part into macros 2/3,
// which the accumulator subtracts (acc_neg = 1100). The sum is passed through
// ReLU, and the four output positions of a 4 x 4 input map (valid 2 x 2 output) are max
// pooled into one vector of 256 channels.
//
// Checks: every ADC code and the pooled output against the closed-form model of the
// converters, and each pre-activation sum against the ideal real-valued convolution
// (within the quantisation error of the four conversions and the re-encoding: 1.75).
module tb_conv_layer_mapping;
  import afpr_pkg::*;
  localparam int NM = 4, R = 576, C = 256, GB = 5;
  localparam int unsigned GAIN = 45;
  localparam int INT_CYC = 29;
  localparam int C1 = 128, K = 3, HW = 4, OW = HW - K + 1;
  localparam int KROWS = C1 * K * K;       // 1152

  int checks = 0, failures = 0;
  logic clk = 0, rst_n;
  logic prog_en, in_wr_en, start;
  logic [$clog2(NM)-1:0] prog_macro, in_macro;
  logic [$clog2(R)-1:0] prog_row, in_row;
  logic [GB-1:0] prog_g [C];
  fp8_t in_data;
  logic [NM-1:0] acc_mask, acc_neg;
  logic [1:0] acc_shift;
  act_mode_e act_mode;
  logic [3:0] pool_win;
  logic busy, done, acc_sat, out_valid;
  fp8_t macro_result [NM][C];
  logic macro_ovf [NM][C];
  logic [$clog2(C+1)-1:0] act_n_relu, act_n_clip;
  fp8_t out_vec [C];
  logic [$clog2(C)-1:0] out_rd_addr;
  fp8_t out_rd_data;

  afpr_cim_top dut (
    .clk(clk), .rst_n(rst_n), .prog_en(prog_en), .prog_macro(prog_macro), .prog_row(prog_row),
    .prog_g(prog_g), .in_wr_en(in_wr_en), .in_macro(in_macro), .in_row(in_row), .in_data(in_data),
    .start(start), .acc_mask(acc_mask), .acc_neg(acc_neg), .acc_shift(acc_shift),
    .act_mode(act_mode), .pool_win(pool_win), .busy(busy), .done(done),
    .macro_result(macro_result), .macro_ovf(macro_ovf), .acc_sat(acc_sat),
    .act_n_relu(act_n_relu), .act_n_clip(act_n_clip), .out_valid(out_valid), .out_vec(out_vec),
    .out_rd_addr(out_rd_addr), .out_rd_data(out_rd_data));

  always #5 clk = ~clk;

  int w [KROWS][C];                  // signed kernel, unrolled
  fp8_t x [C1][HW][HW];              // input feature map
  real pool_max [C];
  int n_sub_ok = 0, n_relu = 0, n_ideal = 0, n_big = 0;

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic real val(fp8_t v);
    real r;
    if (!v.nz) return 0.0;
    r = (1.0 + v.m / 32.0) * (2.0 ** v.e);
    return v.sign ? -r : r;
  endfunction

  function automatic fp8_t enc(real r);
    fp8_t y;
    real a;
    int e;
    y = FP_ZERO;
    a = (r < 0) ? -r : r;
    if (a < 1.0) return y;
    y.nz = 1; y.sign = (r < 0);
    if (a > 15.75) begin y.e = 3; y.m = 31; return y; end
    e = (a >= 8.0) ? 3 : (a >= 4.0) ? 2 : (a >= 2.0) ? 1 : 0;
    y.e = 2'(e);
    y.m = 5'($floor((a / (2.0 ** e) - 1.0) * 32.0));
    return y;
  endfunction

  function automatic fp8_t adc_ref(longint cur, output bit o);
    longint q, unit;
    int e, m;
    fp8_t y;
    y = FP_ZERO;
    q = cur * INT_CYC * GAIN;
    e = 0;
    while (e < 3 && q > (longint'(2_000_000) * 256) << e) e++;
    o = (e == 3) && (q > (longint'(2_000_000) * 256) << 3);
    if (e == 0 && q <= longint'(1_000_000) * 256) return y;
    unit = (longint'(31_250) * 256) << e;
    m = int'((q - ((longint'(1_000_000) * 256) << e) + unit - 1) / unit);
    if (m > 31) m = 31;
    y.nz = 1; y.e = 2'(e); y.m = 5'(m);
    return y;
  endfunction

  // conductance of macro k, row r, column c for the signed kernel
  function automatic int gcell(int k, int r, int c);
    int wr;
    wr = w[(k % 2) * R + r][c];
    return (k < 2) ? ((wr > 0) ? wr : 0) : ((wr < 0) ? -wr : 0);
  endfunction

  // input of unrolled row kr at output position (oy, ox)
  function automatic fp8_t xin(int kr, int oy, int ox);
    int c1, ky, kx;
    c1 = kr / (K * K); ky = (kr % (K * K)) / K; kx = kr % K;
    return x[c1][oy + ky][ox + kx];
  endfunction

  task automatic program_kernel();
    for (int k = 0; k < NM; k++)
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        prog_en = 1; prog_macro = 2'(k); prog_row = $clog2(R)'(r);
        for (int c = 0; c < C; c++) prog_g[c] = GB'(gcell(k, r, c));
      end
    @(negedge clk);
    prog_en = 0;
  endtask

  task automatic load_window(int oy, int ox);
    for (int k = 0; k < NM; k++)
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        in_wr_en = 1; in_macro = 2'(k); in_row = $clog2(R)'(r);
        in_data = xin((k % 2) * R + r, oy, ox);
      end
    @(negedge clk);
    in_wr_en = 0;
  endtask

  task automatic run_position(int p);
    int lat;
    fp8_t code [NM][C];
    bit ovf [NM][C];
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 0;
    while (!done && lat < 200) begin @(negedge clk); lat++; end
    chk(lat == 64, $sformatf("latency %0d", lat));
    for (int c = 0; c < C; c++) begin
      real s, ideal, y;
      bit any_ovf;
      longint cur [NM];
      any_ovf = 0;
      ideal = 0.0;
      for (int k = 0; k < NM; k++) begin
        cur[k] = 0;
        for (int r = 0; r < R; r++) begin
          fp8_t a;
          a = xin((k % 2) * R + r, p / OW, p % OW);
          if (a.nz) cur[k] += longint'((32 + a.m) << a.e) * gcell(k, r, c);
        end
        code[k][c] = adc_ref(cur[k], ovf[k][c]);
        any_ovf |= ovf[k][c];
        chk(macro_result[k][c] === code[k][c], $sformatf("ADC macro %0d col %0d", k, c));
      end
      // ideal convolution: sum over rows of x * w, in the converters' output units
      for (int kr = 0; kr < KROWS; kr++) ideal += val(xin(kr, p / OW, p % OW)) * w[kr][c];
      ideal = ideal * 32.0 * INT_CYC * GAIN / 256.0e6;
      s = val(code[0][c]) + val(code[1][c]) - val(code[2][c]) - val(code[3][c]);
      if (!any_ovf) begin
        checks++;
        n_ideal++;
        if (s - ideal > 1.75 || ideal - s > 1.75) begin
          failures++;
          $display("FAIL pos %0d ch %0d: mapped sum %f, ideal convolution %f", p, c, s, ideal);
        end else if (s < 0) n_sub_ok++;
      end
      y = val(enc(s));
      if (y < 0) begin y = 0.0; n_relu++; end
      if (y >= 4.0) n_big++;
      if (p == 0 || y > pool_max[c]) pool_max[c] = y;
    end
    repeat (4) @(negedge clk);
    chk(out_valid === (p == OW * OW - 1), "out_valid at the last pooling position");
  endtask

  initial begin
    rst_n = 0; prog_en = 0; in_wr_en = 0; start = 0; prog_macro = 0; prog_row = 0;
    in_macro = 0; in_row = 0; in_data = FP_ZERO; out_rd_addr = 0;
    acc_mask = 4'b1111; acc_neg = 4'b1100; acc_shift = 2'd0; act_mode = ACT_RELU;
    pool_win = 4'(OW * OW);
    for (int c = 0; c < C; c++) prog_g[c] = 0;
    for (int kr = 0; kr < KROWS; kr++)
      for (int c = 0; c < C; c++) begin
        w[kr][c] = int'($urandom_range(0, 62)) - 31 + (c % 16) - 8;
        if (w[kr][c] > 31) w[kr][c] = 31;
        if (w[kr][c] < -31) w[kr][c] = -31;
      end
    for (int c1 = 0; c1 < C1; c1++)
      for (int i = 0; i < HW; i++)
        for (int j = 0; j < HW; j++)
          x[c1][i][j] = '{nz: 1'b1, sign: 1'b0, e: 2'($urandom_range(0, 3)), m: 5'($urandom_range(0, 31))};
    repeat (3) @(negedge clk);
    rst_n = 1;
    program_kernel();
    for (int p = 0; p < OW * OW; p++) begin
      load_window(p / OW, p % OW);
      run_position(p);
    end
    for (int c = 0; c < C; c++) begin
      out_rd_addr = $clog2(C)'(c);
      #1;
      chk(val(out_vec[c]) == pool_max[c] && val(out_rd_data) == pool_max[c],
          $sformatf("pooled ch %0d got %f expected %f", c, val(out_vec[c]), pool_max[c]));
    end
    chk(n_sub_ok > 0 && n_relu > 0 && n_big > 0, "negative sums cut by ReLU and outputs >= 4.0 occurred");
    chk(n_ideal > OW * OW * C / 2, "most sums compared with the ideal convolution");
    $display("compared with the ideal convolution %0d, negative sums %0d, ReLU cuts %0d, outputs >= 4.0 %0d", n_ideal, n_sub_ok, n_relu, n_big);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
