// tb_vth_ramp_gen: 2 V threshold outside readout; ramp 1 V + k/32 V during readout.
module tb_vth_ramp_gen;
  int checks = 0, failures = 0;
  logic ramp_en;
  logic [4:0] count;
  logic [31:0] vth_uv;

  vth_ramp_gen dut (.ramp_en(ramp_en), .count(count), .vth_uv(vth_uv));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 32; k++) begin
      count = 5'(k);
      ramp_en = 0; #1;
      checks++;
      if (vth_uv != 32'd2_000_000) begin failures++; $display("FAIL vth k=%0d", k); end
      ramp_en = 1; #1;
      checks++;
      // 1 V + k * (1 V / 32) in uV, k * 1e6 / 32 exact
      if (vth_uv != 32'(1_000_000 + (k * 1_000_000) / 32)) begin
        failures++;
        $display("FAIL ramp k=%0d vth=%0d", k, vth_uv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
