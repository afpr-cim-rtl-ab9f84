// adc_frontend: behavioural model of the analog front end of one FP-ADC column.
// This is a behavioural model of analog circuitry (active integrator, switched
// capacitor array, C_CDS offset cancellation and comparator), not synthesizable logic
// in the intended sense; it exists so that the digital parts around it can be
// simulated.
//
// How it works. With the integrator's positive input at V_r = 0 the bit line is held
// at V_r and the column current I_MAC charges the feedback capacitance. The model keeps
// the charge q (in uV x C_int, scaled by 256) and adds i_mac x GAIN_Q8 per integrating
// clock. The capacitance is C1 = C_int plus C2 = C_int, C3 = 2 C_int, C4 = 4 C_int for
// each closed switch sw1..sw3, so the total is 1, 2, 4 or 8 C_int. Closing a switch
// shares the charge and V_O = q / C_total drops from 2 V to 1 V: the current
// integrated before and after stays continuous, and V_O x 2^n stays proportional to the
// integrated current. The comparator output is high while V_O > vth_uv. Offsets are
// ideal (C_CDS cancels them).
//
// Interface and timing: rst_int (reset phase) empties all capacitors; integ (sw_in
// closed) adds one clock of current at each rising edge; otherwise the charge is held.
// comp and vo_uv follow q, sw and vth_uv combinationally. GAIN_Q8 stands for C_int and
// the clock period, which the paper does not give.
module adc_frontend #(
  parameter int unsigned GAIN_Q8 = 45
) (
  input  logic        clk,
  input  logic        rst_int,
  input  logic        integ,
  input  logic [2:0]  sw,
  input  logic [31:0] i_mac,
  input  logic [31:0] vth_uv,
  output logic        comp,
  output logic [31:0] vo_uv
);
  logic [63:0] q;
  logic [3:0]  ctot;

  always_comb ctot = 4'd1 + 4'(sw[0]) + {2'b0, sw[1], 1'b0} + {1'b0, sw[2], 2'b0};

  always_ff @(posedge clk) begin
    if (rst_int)    q <= '0;
    else if (integ) q <= q + 64'(i_mac) * 64'(GAIN_Q8);
  end

  always_comb begin
    comp  = q > (64'(vth_uv) * 64'd256 * 64'(ctot));
    vo_uv = 32'(q / (64'd256 * 64'(ctot)));
  end
endmodule
