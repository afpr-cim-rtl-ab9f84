// tb_afpr_cim_top: end-to-end test of the AFPR-CIM core at reduced array size
// (4 macros of 16 x 8 cells, larger integrator gain to match the smaller currents).
//
// Each operation programs random conductances, loads random E2M5 activations, runs
// the four macros and checks (1) the 64-clock macro latency, (2) every macro's ADC code
// against a reference computed here from the ideal MAC sum sum V_i G_i, with the ADC's
// closed-form quantisation, and (3) the back-end output (partial sum over the selected
// macros, subtraction, scale, activation and max pooling), computed with real arithmetic.
// It counts how often each mechanism of the design occurred: every ADC exponent (0..3
// range adjustments), "not read out" results, ADC overflow, multi-macro accumulation,
// subtraction, accumulator saturation, ReLU zeroing, ReLU6 clamping and pooling
// windows above one. A mechanism that never occurred counts as a failure.
module tb_afpr_cim_top;
  import afpr_pkg::*;
  localparam int NM = 4, R = 16, C = 8, GB = 5;
  localparam int unsigned GAIN = 2400;
  localparam int INT_CYC = 29;

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

  afpr_cim_top #(.NMACRO(NM), .ROWS(R), .COLS(C), .G_BITS(GB), .GAIN_Q8(GAIN)) dut (
    .clk(clk), .rst_n(rst_n), .prog_en(prog_en), .prog_macro(prog_macro), .prog_row(prog_row),
    .prog_g(prog_g), .in_wr_en(in_wr_en), .in_macro(in_macro), .in_row(in_row), .in_data(in_data),
    .start(start), .acc_mask(acc_mask), .acc_neg(acc_neg), .acc_shift(acc_shift),
    .act_mode(act_mode), .pool_win(pool_win), .busy(busy), .done(done),
    .macro_result(macro_result), .macro_ovf(macro_ovf), .acc_sat(acc_sat),
    .act_n_relu(act_n_relu), .act_n_clip(act_n_clip), .out_valid(out_valid), .out_vec(out_vec),
    .out_rd_addr(out_rd_addr), .out_rd_data(out_rd_data));

  always #5 clk = ~clk;

  // reference state
  int g_model [NM][R][C];
  int a_e [NM][R], a_m [NM][R];
  bit a_nz [NM][R];
  real pool_max [C];

  // mechanism counters
  int n_exp [4];
  int n_zero = 0, n_ovf = 0, n_multi = 0, n_sub = 0, n_sat = 0, n_relu = 0, n_clip = 0, n_pool = 0;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic real val(fp8_t x);
    real v;
    if (!x.nz) return 0.0;
    v = (1.0 + x.m / 32.0) * (2.0 ** x.e);
    return x.sign ? -v : v;
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

  // expected ADC code of a column current (closed form, see tb_fp_adc)
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

  task automatic program_weights(int gmax);
    for (int k = 0; k < NM; k++)
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        prog_en = 1; prog_macro = 2'(k); prog_row = $clog2(R)'(r);
        for (int c = 0; c < C; c++) begin
          g_model[k][r][c] = $urandom_range(0, gmax);
          prog_g[c] = GB'(g_model[k][r][c]);
        end
      end
    @(negedge clk);
    prog_en = 0;
  endtask

  task automatic load_inputs(int density, int emax);
    for (int k = 0; k < NM; k++)
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        a_nz[k][r] = ($urandom_range(0, 99) < density);
        a_e[k][r] = $urandom_range(0, emax);
        a_m[k][r] = $urandom_range(0, 31);
        in_wr_en = 1; in_macro = 2'(k); in_row = $clog2(R)'(r);
        in_data = '{nz: a_nz[k][r], sign: 1'b0, e: 2'(a_e[k][r]), m: 5'(a_m[k][r])};
      end
    @(negedge clk);
    in_wr_en = 0;
  endtask

  // one macro operation plus back end; p = position inside the pooling window
  task automatic run_op(int p, int w);
    int lat;
    fp8_t exp_code [NM][C];
    real s, y;
    bit o, any_sat;
    int er, ec;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 0;
    while (!done && lat < 200) begin @(negedge clk); lat++; end
    chk(lat == 64, $sformatf("macro latency 64 clocks (got %0d)", lat));
    // ADC codes
    for (int k = 0; k < NM; k++)
      for (int c = 0; c < C; c++) begin
        longint cur = 0;
        for (int r = 0; r < R; r++)
          if (a_nz[k][r]) cur += longint'((32 + a_m[k][r]) << a_e[k][r]) * g_model[k][r][c];
        exp_code[k][c] = adc_ref(cur, o);
        chk(macro_result[k][c] === exp_code[k][c] && macro_ovf[k][c] === o,
            $sformatf("ADC macro %0d col %0d cur %0d got %b expected %b", k, c, cur, macro_result[k][c], exp_code[k][c]));
        if (!exp_code[k][c].nz) n_zero++; else n_exp[exp_code[k][c].e]++;
        if (o) n_ovf++;
      end
    // back end
    any_sat = 0; er = 0; ec = 0;
    for (int c = 0; c < C; c++) begin
      s = 0.0;
      for (int k = 0; k < NM; k++) if (acc_mask[k]) s += acc_neg[k] ? -val(exp_code[k][c]) : val(exp_code[k][c]);
      s = s / (2.0 ** acc_shift);
      if (s > 15.75 || s < -15.75) begin any_sat = 1; n_sat++; end
      y = val(enc(s));
      if (act_mode != ACT_BYPASS && y < 0) begin y = 0.0; er++; end
      else if (act_mode == ACT_RELU6 && y > 6.0) begin y = 6.0; ec++; end
      if (p == 0 || y > pool_max[c]) pool_max[c] = y;
    end
    n_relu += er; n_clip += ec;
    if ($countones(acc_mask) > 1) n_multi++;
    if ((acc_mask & acc_neg) != 0) n_sub++;
    @(negedge clk);   // accumulator stage
    chk(acc_sat === any_sat, "accumulator saturation flag");
    @(negedge clk);   // activation stage
    chk(int'(act_n_relu) == er && int'(act_n_clip) == ec, "activation counts");
    @(negedge clk);   // pooling stage
    @(negedge clk);   // output buffer
    chk(out_valid === (p == w - 1), $sformatf("out_valid at window position %0d of %0d", p, w));
    if (p == w - 1) begin
      if (w > 1) n_pool++;
      for (int c = 0; c < C; c++) begin
        out_rd_addr = $clog2(C)'(c);
        #1;
        chk(val(out_vec[c]) == pool_max[c] && val(out_rd_data) == pool_max[c],
            $sformatf("output col %0d got %f expected %f", c, val(out_vec[c]), pool_max[c]));
      end
    end
  endtask

  initial begin
    rst_n = 0; prog_en = 0; in_wr_en = 0; start = 0; prog_macro = 0; prog_row = 0;
    in_macro = 0; in_row = 0; in_data = FP_ZERO; acc_mask = 4'b0001; acc_neg = 0; acc_shift = 0;
    act_mode = ACT_BYPASS; pool_win = 1; out_rd_addr = 0;
    for (int c = 0; c < C; c++) prog_g[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      int w;
      w = (t % 3 == 2) ? 1 + $urandom_range(1, 3) : 1;
      program_weights((t % 4 == 0) ? 3 : 31);
      acc_mask = 4'($urandom_range(1, 15));
      acc_neg = (t % 2 == 1) ? 4'($urandom) : 4'b0;
      if (t % 7 == 6) acc_mask = 4'b1111;
      acc_shift = (t % 7 == 6) ? 2'd0 : 2'($urandom_range(0, 2));
      act_mode = act_mode_e'(t % 3);
      pool_win = 4'(w);
      for (int p = 0; p < w; p++) begin
        if (t % 7 == 6) load_inputs(100, 3);
        else load_inputs((t % 5 == 0) ? 15 : 30 + 10 * (t % 6), (t % 4 == 3) ? 3 : 1 + (t % 3));
        run_op(p, w);
      end
    end
    chk(n_exp[0] > 0, "mechanism: exponent 0 (no range adjustment)");
    chk(n_exp[1] > 0, "mechanism: one range adjustment");
    chk(n_exp[2] > 0, "mechanism: two range adjustments");
    chk(n_exp[3] > 0, "mechanism: three range adjustments");
    chk(n_zero > 0, "mechanism: result not read out");
    chk(n_ovf > 0, "mechanism: ADC overflow");
    chk(n_multi > 0, "mechanism: partial sums over several macros");
    chk(n_sub > 0, "mechanism: subtracted macro");
    chk(n_sat > 0, "mechanism: accumulator saturation");
    chk(n_relu > 0, "mechanism: ReLU zeroing");
    chk(n_clip > 0, "mechanism: ReLU6 clamp");
    chk(n_pool > 0, "mechanism: pooling window above one");
    $display("mechanisms: e0=%0d e1=%0d e2=%0d e3=%0d zero=%0d ovf=%0d multi=%0d sub=%0d sat=%0d relu=%0d clip=%0d pool=%0d",
             n_exp[0], n_exp[1], n_exp[2], n_exp[3], n_zero, n_ovf, n_multi, n_sub, n_sat, n_relu, n_clip, n_pool);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
