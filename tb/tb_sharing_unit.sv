// tb_sharing_unit: counter and ramp move together during readout and rest at 0 / 2 V
// otherwise.
module tb_sharing_unit;
  int checks = 0, failures = 0;
  logic clk = 0, clr, read_en;
  logic [4:0] count;
  logic [31:0] vth_uv;

  sharing_unit dut (.clk(clk), .clr(clr), .read_en(read_en), .count(count), .vth_uv(vth_uv));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 1; read_en = 0;
    @(posedge clk); #1;
    clr = 0;
    checks++;
    if (count != 0 || vth_uv != 2_000_000) begin failures++; $display("FAIL idle"); end
    for (int k = 0; k < 32; k++) begin
      read_en = 1; #1;
      checks++;
      if (int'(count) != k || vth_uv != 32'(1_000_000 + k * 31_250)) begin
        failures++;
        $display("FAIL step %0d count=%0d vth=%0d", k, count, vth_uv);
      end
      @(posedge clk); #1;
    end
    read_en = 0; #1;
    checks++;
    if (vth_uv != 2_000_000) begin failures++; $display("FAIL back to threshold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
