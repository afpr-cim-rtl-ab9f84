// tb_afpr_macro: one macro at reduced size (24 x 8 cells). Random conductances and
// activations (including zero words); every column's E2M5 result and overflow flag is
// compared with the closed-form ADC quantisation of the ideal MAC sum sum V_i G_i, and
// the 64-clock latency from start to done is checked. Inputs span all four exponents.
module tb_afpr_macro;
  import afpr_pkg::*;
  localparam int R = 24, C = 8, GB = 5;
  localparam int unsigned GAIN = 1600;
  localparam int INT_CYC = 29;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n, in_wr_en, prog_en, start, busy, done;
  logic [$clog2(R)-1:0] in_wr_row, prog_row;
  fp8_t in_wr_data;
  logic [GB-1:0] prog_g [C];
  fp8_t result [C];
  logic ovf [C];
  int g_model [R][C];
  int v_model [R];
  int n_exp [4];
  int n_zero = 0;

  afpr_macro #(.ROWS(R), .COLS(C), .G_BITS(GB), .GAIN_Q8(GAIN)) dut (.clk(clk), .rst_n(rst_n),
    .in_wr_en(in_wr_en), .in_wr_row(in_wr_row), .in_wr_data(in_wr_data), .prog_en(prog_en),
    .prog_row(prog_row), .prog_g(prog_g), .start(start), .busy(busy), .done(done),
    .result(result), .ovf(ovf));

  always #5 clk = ~clk;

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

  initial begin
    rst_n = 0; in_wr_en = 0; prog_en = 0; start = 0; in_wr_row = 0; prog_row = 0; in_wr_data = FP_ZERO;
    for (int c = 0; c < C; c++) prog_g[c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int lat;
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        prog_en = 1; prog_row = $clog2(R)'(r);
        for (int c = 0; c < C; c++) begin
          g_model[r][c] = $urandom_range(0, (t % 3 == 0) ? 7 : 31);
          prog_g[c] = GB'(g_model[r][c]);
        end
      end
      @(negedge clk); prog_en = 0;
      for (int r = 0; r < R; r++) begin
        int e, m;
        bit nz;
        @(negedge clk);
        nz = $urandom_range(0, 99) < 20 + 3 * t;
        e = $urandom_range(0, 3);
        m = $urandom_range(0, 31);
        // V_DAC = 2^E x (1 + M/32), in units of 1/32
        v_model[r] = nz ? int'((1.0 + m / 32.0) * (2.0 ** e) * 32.0) : 0;
        in_wr_en = 1; in_wr_row = $clog2(R)'(r);
        in_wr_data = '{nz: nz, sign: 1'b0, e: 2'(e), m: 5'(m)};
      end
      @(negedge clk); in_wr_en = 0;
      start = 1;
      @(negedge clk); start = 0;
      lat = 0;
      while (!done && lat < 200) begin @(negedge clk); lat++; end
      chk(lat == 64, $sformatf("latency 64 clocks, got %0d", lat));
      for (int c = 0; c < C; c++) begin
        longint cur, q, unit;
        int e, m;
        bit z, o;
        cur = 0;
        for (int r = 0; r < R; r++) cur += longint'(v_model[r]) * g_model[r][c];
        q = cur * INT_CYC * GAIN;
        e = 0;
        while (e < 3 && q > (longint'(2_000_000) * 256) << e) e++;
        z = (e == 0) && (q <= longint'(1_000_000) * 256);
        o = (e == 3) && (q > (longint'(2_000_000) * 256) << 3);
        unit = (longint'(31_250) * 256) << e;
        m = z ? 0 : int'((q - ((longint'(1_000_000) * 256) << e) + unit - 1) / unit);
        if (m > 31) m = 31;
        chk(result[c].nz == !z && (z || (int'(result[c].e) == e && int'(result[c].m) == m)) && ovf[c] == o,
            $sformatf("col %0d cur %0d got nz=%b e=%0d m=%0d expected z=%b e=%0d m=%0d", c, cur,
                      result[c].nz, result[c].e, result[c].m, z, e, m));
        if (z) n_zero++; else n_exp[e]++;
      end
    end
    chk(n_zero > 0 && n_exp[0] > 0 && n_exp[1] > 0 && n_exp[2] > 0 && n_exp[3] > 0,
        $sformatf("coverage zero=%0d e=%0d/%0d/%0d/%0d", n_zero, n_exp[0], n_exp[1], n_exp[2], n_exp[3]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
