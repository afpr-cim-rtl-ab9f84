// tb_control_unit: phase lengths of one operation with the default parameters
// (reset 2, integrate 29, settle 1, readout 32 clocks) and done exactly 64 clocks
// (0.2 us at 3.125 ns) after the start edge; start is ignored while busy.
module tb_control_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n, start, busy, rst_ph, integ, adapt_en, read_en, first, done;
  int n_rst, n_int, n_adapt, n_read, n_first, t_done, t;

  control_unit dut (.clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .rst_ph(rst_ph),
    .integ(integ), .adapt_en(adapt_en), .read_en(read_en), .first(first), .done(done));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    rst_n = 0; start = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(!busy && !done, "idle after reset");
    for (int op = 0; op < 2; op++) begin
      n_rst = 0; n_int = 0; n_adapt = 0; n_read = 0; n_first = 0; t_done = -1;
      start = 1;
      @(posedge clk); #1;
      start = (op == 1);           // second run keeps start high: must not restart early
      for (t = 0; t < 70; t++) begin
        if (rst_ph) n_rst++;
        if (integ) n_int++;
        if (adapt_en) n_adapt++;
        if (read_en) n_read++;
        if (first) n_first++;
        if (first) chk(read_en && n_read == 1, "first marks the first readout step");
        if (done && t_done < 0) t_done = t;
        @(posedge clk); #1;
        if (t == 62) start = 0;
      end
      chk(n_rst == 2, "reset phase 2 clocks");
      chk(n_int == 29, "integration 29 clocks");
      chk(n_adapt == 30, "adaptive control enabled 30 clocks");
      chk(n_read == 32, "readout 32 clocks");
      chk(n_first == 1, "one first step");
      chk(t_done == 64, $sformatf("done after 64 clocks (got %0d)", t_done));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
