// tb_adaptive_ctrl: comparator pulses in the adaptive phase close sw1, sw2, sw3 in turn
// (thermometer 001, 011, 111); a fourth pulse sets overflow; pulses outside the adaptive
// phase change nothing; reset clears the chain.
module tb_adaptive_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst, adapt_en, comp;
  logic [2:0] therm;
  logic ovf;
  int n_model;

  adaptive_ctrl dut (.clk(clk), .rst(rst), .adapt_en(adapt_en), .comp(comp), .therm(therm), .ovf(ovf));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_state(int n, logic o, string tag);
    logic [2:0] t;
    t = (n == 0) ? 3'b000 : (n == 1) ? 3'b001 : (n == 2) ? 3'b011 : 3'b111;
    checks++;
    if (therm !== t || ovf !== o) begin
      failures++;
      $display("FAIL %s: therm=%b ovf=%b expected %b %b", tag, therm, ovf, t, o);
    end
  endtask

  initial begin
    rst = 1; adapt_en = 0; comp = 0;
    @(posedge clk); #1;
    rst = 0;
    expect_state(0, 0, "after reset");
    // comparator high outside the adaptive phase: ignored
    comp = 1;
    @(posedge clk); #1;
    expect_state(0, 0, "gated");
    comp = 0; adapt_en = 1;
    n_model = 0;
    for (int p = 0; p < 4; p++) begin
      repeat (3) @(posedge clk);
      #1;
      expect_state(n_model, 0, "idle between pulses");
      comp = 1;
      @(posedge clk); #1;
      comp = 0;
      if (n_model < 3) begin
        n_model++;
        expect_state(n_model, 0, "after pulse");
      end else begin
        expect_state(3, 1, "overflow");
      end
    end
    adapt_en = 0;
    rst = 1;
    @(posedge clk); #1;
    rst = 0;
    expect_state(0, 0, "second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
