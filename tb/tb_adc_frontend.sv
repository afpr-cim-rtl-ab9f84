// tb_adc_frontend: the integrator ramps linearly with a constant current; closing sw1,
// sw2, sw3 shares the charge (V_O halves each time, total capacitance 2, 4, 8 C_int);
// the comparator reports V_O > V_th; reset empties the capacitors; the output holds when
// integration stops.
module tb_adc_frontend;
  int checks = 0, failures = 0;
  logic clk = 0, rst_int, integ;
  logic [2:0] sw;
  logic [31:0] i_mac, vth_uv, vo_uv;
  logic comp;
  localparam int unsigned GAIN = 256;   // 1 uV per current unit per clock

  adc_frontend #(.GAIN_Q8(GAIN)) dut (.clk(clk), .rst_int(rst_int), .integ(integ), .sw(sw),
    .i_mac(i_mac), .vth_uv(vth_uv), .comp(comp), .vo_uv(vo_uv));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s vo=%0d comp=%b", msg, vo_uv, comp); end
  endtask

  initial begin
    rst_int = 1; integ = 0; sw = 0; i_mac = 100_000; vth_uv = 2_000_000;
    @(posedge clk); #1;
    rst_int = 0;
    chk(vo_uv == 0, "reset");
    integ = 1;
    for (int n = 1; n <= 20; n++) begin
      @(posedge clk); #1;
      chk(vo_uv == 32'(n * 100_000), "linear ramp on C1");
      chk(comp == (n * 100_000 > 2_000_000), "comparator");
    end
    // 2.0 V on C1: one more clock gives 2.1 V and the comparator fires
    @(posedge clk); #1;
    chk(comp, "comparator above 2 V");
    integ = 0; sw = 3'b001; #1;
    chk(vo_uv == 1_050_000, "charge shared onto C2: 2.1 V -> 1.05 V");
    chk(!comp, "comparator low after sharing");
    sw = 3'b011; #1;
    chk(vo_uv == 525_000, "C1+C2+C3 = 4 C_int");
    sw = 3'b111; #1;
    chk(vo_uv == 262_500, "C1..C4 = 8 C_int");
    repeat (3) @(posedge clk);
    #1;
    chk(vo_uv == 262_500, "hold with sw_in open");
    vth_uv = 200_000; #1;
    chk(comp, "comparator against a lower reference");
    rst_int = 1;
    @(posedge clk); #1;
    chk(vo_uv == 0, "second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
