// tb_rram_crossbar: programs random conductances row by row into a reduced array
// (24 x 6), applies random row voltages and checks every column current against
// sum V_i x G_i computed by the testbench; then reprograms one row and checks again.
module tb_rram_crossbar;
  int checks = 0, failures = 0;
  localparam int R = 24, C = 6, GB = 5;
  logic clk = 0, prog_en, eval;
  logic [$clog2(R)-1:0] prog_row;
  logic [GB-1:0] prog_g [C];
  logic [8:0] v_row [R];
  logic [31:0] i_mac [C];
  int g_model [R][C];

  rram_crossbar #(.ROWS(R), .COLS(C), .G_BITS(GB)) dut (.clk(clk), .prog_en(prog_en),
    .prog_row(prog_row), .prog_g(prog_g), .eval(eval), .v_row(v_row), .i_mac(i_mac));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic program_row(int r);
    prog_en = 1; prog_row = $clog2(R)'(r);
    for (int c = 0; c < C; c++) begin
      g_model[r][c] = $urandom_range(0, 31);
      prog_g[c] = GB'(g_model[r][c]);
    end
    @(posedge clk); #1;
    prog_en = 0;
  endtask

  task automatic evaluate_and_check();
    for (int r = 0; r < R; r++) v_row[r] = 9'($urandom_range(0, 504));
    eval = 1;
    @(posedge clk); #1;
    eval = 0;
    for (int c = 0; c < C; c++) begin
      int s = 0;
      for (int r = 0; r < R; r++) s += int'(v_row[r]) * g_model[r][c];
      checks++;
      if (int'(i_mac[c]) != s) begin failures++; $display("FAIL col %0d %0d != %0d", c, i_mac[c], s); end
    end
  endtask

  initial begin
    prog_en = 0; eval = 0;
    for (int r = 0; r < R; r++) program_row(r);
    repeat (5) evaluate_and_check();
    program_row(7);
    evaluate_and_check();
    // held while eval is low
    for (int r = 0; r < R; r++) v_row[r] = 0;
    @(posedge clk); #1;
    checks++;
    if (i_mac[0] == 0 && i_mac[1] == 0 && i_mac[2] == 0) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
