// rram_column: behavioural model of one source-line column of the RRAM array.
// This is a behavioural model of analog multi-level RRAM cells, not logic.
//
// Each cell stores a conductance level g (in uS). With the source line clamped to
// V_r = 0 by the FP-ADC integrator, Ohm's and Kirchhoff's laws give the column current
// I_MAC = sum_i V_i x G_i. The model evaluates that sum when eval is high (the reset
// phase of an operation, before integration starts) and holds it in i_mac, in units of
// one DAC step x 1 uS.
//
// Programming: while prog_en is high, the cell of row prog_row takes the level prog_g at
// the rising clock edge (one row per clock). The paper only says that the weights are
// programmed before inference; the write port is this design's.
module rram_column #(
  parameter int ROWS   = 576,
  parameter int G_BITS = 5
) (
  input  logic                    clk,
  input  logic                    prog_en,
  input  logic [$clog2(ROWS)-1:0] prog_row,
  input  logic [G_BITS-1:0]       prog_g,
  input  logic                    eval,
  input  logic [8:0]              v_row [ROWS],
  output logic [31:0]             i_mac
);
  logic [G_BITS-1:0] g [ROWS];

  always_ff @(posedge clk) begin
    if (prog_en) g[prog_row] <= prog_g;
  end

  always_ff @(posedge clk) begin
    if (eval) begin
      logic [31:0] acc;
      acc = '0;
      for (int r = 0; r < ROWS; r++) acc += 32'(v_row[r]) * 32'(g[r]);
      i_mac <= acc;
    end
  end
endmodule
