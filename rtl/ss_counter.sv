// ss_counter: column-shared counter of the single-slope mantissa conversion.
//
// During the readout phase the counter advances once per clock (Phi_C) together with
// the ramp; every column's mantissa register latches the count at which the ramp
// reaches its held voltage. One counter serves all columns of a macro. clr returns
// it to zero; with en low it holds. It stops at its top value instead of wrapping
// (this design's choice), so a ramp that never crosses reads as all ones.
// Width 5 bits as in the paper; the value appears one clock after the enable edge.
module ss_counter #(
  parameter int WIDTH = 5
) (
  input  logic             clk,
  input  logic             clr,
  input  logic             en,
  output logic [WIDTH-1:0] count
);
  always_ff @(posedge clk) begin
    if (clr)                 count <= '0;
    else if (en && !(&count)) count <= count + 1'b1;
  end
endmodule
