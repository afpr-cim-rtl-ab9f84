// tb_therm2bin: all eight input codes of the thermometer-to-binary encoder. The four
// thermometer codes 000/001/011/111 must give 0/1/2/3; other codes give their count of ones.
module tb_therm2bin;
  int checks = 0, failures = 0;
  logic [2:0] therm;
  logic [1:0] bin;
  // expected output for therm = 0..7
  logic [1:0] expect_tab [8] = '{2'd0, 2'd1, 2'd1, 2'd2, 2'd1, 2'd2, 2'd2, 2'd3};

  therm2bin dut (.therm(therm), .bin(bin));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      therm = 3'(i);
      #1;
      checks++;
      if (bin !== expect_tab[i]) begin
        failures++;
        $display("FAIL therm=%b bin=%0d", therm, bin);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
