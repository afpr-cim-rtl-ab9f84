// tb_adc_transient_example: the FP-ADC transient example at full macro size and default
// parameters. Every one of the 576 rows gets the input code 1011110 (E = 10, M = 11110);
// the conductances of column c are 7 uS on every row for c < 128 and c % 8 uS otherwise.
// With the default integrator gain a 7 uS column integrates to V_M of about 1.274 V after
// two range adjustments and must read 1001001, the code of the worked example
// (V_M = 1.271 V, ideal 1.28 V). Other columns are checked against the closed form.
// The test also records the integrator waveform of column 0 and checks that V_O was
// reset, rose, was halved back to about 1 V twice and was held at V_M during readout.
module tb_adc_transient_example;
  import afpr_pkg::*;
  localparam int R = 576, C = 256;
  localparam int unsigned GAIN = 45;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n, in_wr_en, prog_en, start, busy, done;
  logic [$clog2(R)-1:0] in_wr_row, prog_row;
  fp8_t in_wr_data;
  logic [4:0] prog_g [C];
  fp8_t result [C];
  logic ovf [C];
  int n_drops = 0;
  logic [31:0] vo_prev;

  afpr_macro dut (.clk(clk), .rst_n(rst_n), .in_wr_en(in_wr_en), .in_wr_row(in_wr_row),
    .in_wr_data(in_wr_data), .prog_en(prog_en), .prog_row(prog_row), .prog_g(prog_g),
    .start(start), .busy(busy), .done(done), .result(result), .ovf(ovf));

  always #5 clk = ~clk;

  function automatic int gcol(int c);
    return (c < 128) ? 7 : c % 8;
  endfunction

  // count the charge-sharing drops of V_O in column 0 (V_O falls by about half)
  always @(posedge clk) begin
    if (dut.integ || dut.adapt_en) begin
      if (dut.g_adc[0].u_adc.vo_uv + 500_000 < vo_prev) n_drops++;
    end
    vo_prev <= dut.g_adc[0].u_adc.vo_uv;
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_wr_en = 0; prog_en = 0; start = 0; in_wr_row = 0; prog_row = 0; in_wr_data = FP_ZERO;
    for (int c = 0; c < C; c++) prog_g[c] = 5'(gcol(c));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) begin
      prog_en = 1; prog_row = $clog2(R)'(r);
      in_wr_en = 1; in_wr_row = $clog2(R)'(r);
      in_wr_data = '{nz: 1'b1, sign: 1'b0, e: 2'b10, m: 5'b11110};
      @(negedge clk);
    end
    prog_en = 0; in_wr_en = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if ({result[0].e, result[0].m} !== 7'b1001001 || !result[0].nz) begin
      failures++;
      $display("FAIL example column reads %b%b", result[0].e, result[0].m);
    end
    checks++;
    if (n_drops != 2) begin failures++; $display("FAIL %0d range adjustments seen, expected 2", n_drops); end
    checks++;
    if (dut.g_adc[0].u_adc.vo_uv < 1_250_000 || dut.g_adc[0].u_adc.vo_uv > 1_300_000) begin
      failures++;
      $display("FAIL held V_M %0d uV", dut.g_adc[0].u_adc.vo_uv);
    end
    for (int c = 0; c < C; c++) begin
      longint cur, q, unit;
      int e, m;
      bit z;
      cur = longint'(R) * 248 * gcol(c);       // 248 = (32 + 30) << 2
      q = cur * 29 * GAIN;
      e = 0;
      while (e < 3 && q > (longint'(2_000_000) * 256) << e) e++;
      z = (e == 0) && (q <= longint'(1_000_000) * 256);
      unit = (longint'(31_250) * 256) << e;
      m = z ? 0 : int'((q - ((longint'(1_000_000) * 256) << e) + unit - 1) / unit);
      if (m > 31) m = 31;
      checks++;
      if (result[c].nz == z || (!z && (int'(result[c].e) != e || int'(result[c].m) != m))) begin
        failures++;
        $display("FAIL col %0d got %b expected z=%b e=%0d m=%0d", c, result[c], z, e, m);
      end
    end
    $display("V_M of the example column: %0d uV, code %b%b", dut.g_adc[0].u_adc.vo_uv, result[0].e, result[0].m);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
