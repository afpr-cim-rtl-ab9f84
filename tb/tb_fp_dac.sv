// tb_fp_dac: all 128 E2M5 codes: the row voltage must be 2^E x (1 + M/32) in units of
// 1/32, computed here with real arithmetic; a zero word gives 0.
module tb_fp_dac;
  import afpr_pkg::*;
  int checks = 0, failures = 0;
  fp8_t din;
  logic [8:0] v_dac;

  fp_dac dut (.din(din), .v_dac(v_dac));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int code = 0; code < 128; code++) begin
      real expect_v;
      din = '{nz: 1'b1, sign: 1'b0, e: 2'(code >> 5), m: 5'(code)};
      #1;
      expect_v = (2.0 ** (code >> 5)) * (1.0 + (code % 32) / 32.0) * 32.0;
      checks++;
      if (real'(v_dac) != expect_v) begin
        failures++;
        $display("FAIL code %b v=%0d expected %f", 7'(code), v_dac, expect_v);
      end
      din.nz = 1'b0;
      #1;
      checks++;
      if (v_dac != 0) begin failures++; $display("FAIL zero code %0d", code); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
