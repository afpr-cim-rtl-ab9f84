// tb_dac_linearity: the FP-DAC linearity sweep. Every input code 0000000..1111111 drives
// one row of an RRAM column at the example conductances 12, 15, 18 and 20 uS; the cell
// current must be G x 2^E x (1 + M/32) (in units of 1/32 DAC level x uS), i.e. linear in
// the mantissa within each exponent group and doubling from group to group.
module tb_dac_linearity;
  import afpr_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, prog_en, eval;
  logic [0:0] prog_row;
  logic [4:0] prog_g;
  fp8_t din;
  logic [8:0] v_row [2];
  logic [31:0] i_mac;
  int gs [4] = '{20, 18, 15, 12};

  fp_dac u_dac (.din(din), .v_dac(v_row[0]));
  rram_column #(.ROWS(2), .G_BITS(5)) u_col (.clk(clk), .prog_en(prog_en), .prog_row(prog_row),
    .prog_g(prog_g), .eval(eval), .v_row(v_row), .i_mac(i_mac));

  always #5 clk = ~clk;
  always_comb v_row[1] = '0;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prog_en = 0; eval = 0; prog_row = 0; prog_g = 0; din = FP_ZERO;
    @(negedge clk);
    prog_en = 1; prog_row = 1; prog_g = 0;
    @(negedge clk);
    for (int gi = 0; gi < 4; gi++) begin
      real prev;
      prog_en = 1; prog_row = 0; prog_g = 5'(gs[gi]);
      @(negedge clk);
      prog_en = 0;
      for (int code = 0; code < 128; code++) begin
        real expect_i;
        din = '{nz: 1'b1, sign: 1'b0, e: 2'(code >> 5), m: 5'(code)};
        eval = 1;
        @(negedge clk);
        eval = 0;
        expect_i = gs[gi] * (2.0 ** (code >> 5)) * (32.0 + (code % 32));
        checks++;
        if (real'(i_mac) != expect_i) begin
          failures++;
          $display("FAIL G=%0d code=%b I=%0d expected %f", gs[gi], 7'(code), i_mac, expect_i);
        end
        // within an exponent group each mantissa step adds the same current
        if (code % 32 != 0) begin
          checks++;
          if (real'(i_mac) - prev != gs[gi] * (2.0 ** (code >> 5))) begin
            failures++;
            $display("FAIL linearity G=%0d code=%b", gs[gi], 7'(code));
          end
        end
        prev = real'(i_mac);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
