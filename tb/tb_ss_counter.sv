// tb_ss_counter: the shared readout counter clears, counts one step per enabled clock,
// holds when disabled and stops at 31.
module tb_ss_counter;
  int checks = 0, failures = 0;
  logic clk = 0, clr, en;
  logic [4:0] count;
  int model;

  ss_counter #(.WIDTH(5)) dut (.clk(clk), .clr(clr), .en(en), .count(count));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 1; en = 0;
    @(posedge clk); #1;
    clr = 0;
    model = 0;
    for (int i = 0; i < 60; i++) begin
      en = (i % 7) != 3;
      @(posedge clk); #1;
      if (en && model < 31) model++;
      checks++;
      if (int'(count) != model) begin
        failures++;
        $display("FAIL step %0d count=%0d expected %0d", i, count, model);
      end
    end
    clr = 1;
    @(posedge clk); #1;
    checks++;
    if (count != 0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
