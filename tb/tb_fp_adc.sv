// tb_fp_adc: full conversions of one FP-ADC column with the phase sequence of a macro
// operation (2 reset, 29 integrating, 1 settle, 32 readout clocks) driven by the
// testbench. The expected code is computed in closed form from the integrated charge:
// exponent = number of times 2 V x 2^e is exceeded (at most 3); V_M = V_O / 2^e;
// mantissa = ceil((V_M - 1 V) x 32) saturated at 31; zero when V_M <= 1 V with e = 0;
// overflow when V_M > 2 V at e = 3. Covers the paper's example (E=10, V_M = 1.271 V ->
// 1001001) and random currents over all four exponents, underflow and overflow.
module tb_fp_adc;
  import afpr_pkg::*;
  int checks = 0, failures = 0;
  localparam int unsigned GAIN = 45;
  localparam int INT_CYC = 29;
  logic clk = 0, rst, integ, adapt_en, read_en, first;
  logic [4:0] count;
  logic [31:0] vth_uv, i_mac, vo_uv;
  fp8_t result;
  logic ovf;
  int n_exp [4];
  int n_zero = 0, n_ovf = 0;

  fp_adc #(.GAIN_Q8(GAIN)) dut (.clk(clk), .rst(rst), .integ(integ), .adapt_en(adapt_en),
    .read_en(read_en), .first(first), .count(count), .vth_uv(vth_uv), .i_mac(i_mac),
    .result(result), .ovf(ovf), .vo_uv(vo_uv));

  always #5 clk = ~clk;
  always_comb vth_uv = read_en ? 32'(1_000_000 + int'(count) * 31_250) : 32'd2_000_000;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic convert(int unsigned cur);
    longint q, unit;
    int e, m;
    bit z, o;
    i_mac = cur;
    rst = 1; integ = 0; adapt_en = 0; read_en = 0; first = 0; count = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0; integ = 1; adapt_en = 1;
    repeat (INT_CYC) @(posedge clk);
    #1 integ = 0;
    @(posedge clk);
    #1 adapt_en = 0;
    for (int k = 0; k < 32; k++) begin
      read_en = 1; first = (k == 0); count = 5'(k);
      @(posedge clk); #1;
    end
    read_en = 0; first = 0;
    // closed-form expectation
    q = longint'(cur) * INT_CYC * GAIN;          // uV x C_int x 256
    e = 0;
    while (e < 3 && q > (longint'(2_000_000) * 256) << e) e++;
    z = (e == 0) && (q <= longint'(1_000_000) * 256);
    o = (e == 3) && (q > (longint'(2_000_000) * 256) << 3);
    unit = (longint'(31_250) * 256) << e;
    if (z) m = 0;
    else begin
      m = int'((q - ((longint'(1_000_000) * 256) << e) + unit - 1) / unit);
      if (m > 31) m = 31;
    end
    checks++;
    if (result.nz !== !z || (!z && (int'(result.e) != e || int'(result.m) != m)) || ovf !== o) begin
      failures++;
      $display("FAIL i=%0d got nz=%b e=%0d m=%0d ovf=%b expected z=%b e=%0d m=%0d ovf=%b",
               cur, result.nz, result.e, result.m, ovf, z, e, m, o);
    end
    if (z) n_zero++; else n_exp[e]++;
    if (o) n_ovf++;
  endtask

  initial begin
    // paper example: V_M = 1.271 V after two adjustments -> E = 10, M = 01001
    convert(997_322);
    checks++;
    if ({result.e, result.m} !== 7'b1001001) begin failures++; $display("FAIL paper example"); end
    convert(0);
    convert(100);
    convert(20_000_000);
    for (int i = 0; i < 150; i++) convert($urandom_range(100_000, 3_500_000));
    checks++;
    if (n_zero == 0 || n_ovf == 0 || n_exp[0] == 0 || n_exp[1] == 0 || n_exp[2] == 0 || n_exp[3] == 0) begin
      failures++;
      $display("FAIL coverage zero=%0d ovf=%0d e0..3=%0d %0d %0d %0d", n_zero, n_ovf, n_exp[0], n_exp[1], n_exp[2], n_exp[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
