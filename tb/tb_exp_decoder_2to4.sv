// tb_exp_decoder_2to4: exhaustive check of the FP-DAC exponent decoder against a table:
// E = 0..3 must close exactly the gain switch for 1x, 2x, 4x, 8x.
module tb_exp_decoder_2to4;
  int checks = 0, failures = 0;
  logic [1:0] e;
  logic [3:0] sel;
  logic [3:0] expect_tab [4] = '{4'b0001, 4'b0010, 4'b0100, 4'b1000};

  exp_decoder_2to4 dut (.e(e), .sel(sel));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      e = 2'(i);
      #1;
      checks++;
      if (sel !== expect_tab[i]) begin
        failures++;
        $display("FAIL e=%0d sel=%b", i, sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
