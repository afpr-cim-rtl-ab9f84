// tb_mantissa_reg: emulates the single-slope readout for many held voltages V_M and checks
// the latched mantissa against the closed form ceil((V_M - 1 V) x 32), saturated at 31,
// and the "not read out" flag for V_M <= 1 V. Includes the paper's example
// V_M = 1.271 V -> 01001.
module tb_mantissa_reg;
  int checks = 0, failures = 0;
  logic clk = 0, rst, read_en, first, comp;
  logic [4:0] count, man;
  logic below;

  mantissa_reg dut (.clk(clk), .rst(rst), .read_en(read_en), .first(first), .comp(comp),
                    .count(count), .man(man), .below(below));

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // comparator model: V_M (uV) above ramp(count)
  int vm_uv;
  always_comb comp = read_en && (vm_uv > 1_000_000 + int'(count) * 31_250);

  task automatic run(int v);
    int exp_m;
    bit exp_below;
    vm_uv = v;
    rst = 1; read_en = 0; first = 0; count = 0;
    @(posedge clk); #1;
    rst = 0;
    for (int k = 0; k < 32; k++) begin
      read_en = 1; first = (k == 0); count = 5'(k);
      @(posedge clk); #1;
    end
    read_en = 0; first = 0;
    exp_below = v <= 1_000_000;
    if (exp_below) exp_m = 0;
    else begin
      exp_m = (v - 1_000_000 + 31_249) / 31_250;
      if (exp_m > 31) exp_m = 31;
    end
    checks++;
    if (below !== exp_below || (!exp_below && int'(man) != exp_m)) begin
      failures++;
      $display("FAIL vm=%0d man=%0d below=%b expected %0d %b", v, man, below, exp_m, exp_below);
    end
  endtask

  initial begin
    run(1_271_000);
    checks++;
    if (man !== 5'b01001) begin failures++; $display("FAIL paper example"); end
    run(500_000);
    run(1_000_000);
    run(1_000_001);
    run(1_999_999);
    run(2_300_000);
    run(1_968_750);
    for (int i = 0; i < 60; i++) run(900_000 + int'($urandom_range(0, 1_150_000)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
