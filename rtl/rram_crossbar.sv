// rram_crossbar: behavioural model of the 576 x 256 multi-level RRAM MAC array.
// This is a behavioural model of analog memory cells; it is built from one
// rram_column model per source line.
//
// Every row carries the voltage of its FP-DAC; every column sums V_i x G_i into its
// current I_MAC, which goes to the column's FP-ADC. Weights are programmed one row at a
// time: prog_g holds the COLS conductance levels of row prog_row. The column currents
// are evaluated when eval is high and held afterwards (see rram_column).
module rram_crossbar #(
  parameter int ROWS   = 576,
  parameter int COLS   = 256,
  parameter int G_BITS = 5
) (
  input  logic                    clk,
  input  logic                    prog_en,
  input  logic [$clog2(ROWS)-1:0] prog_row,
  input  logic [G_BITS-1:0]       prog_g [COLS],
  input  logic                    eval,
  input  logic [8:0]              v_row [ROWS],
  output logic [31:0]             i_mac [COLS]
);
  for (genvar c = 0; c < COLS; c++) begin : g_col
    rram_column #(.ROWS(ROWS), .G_BITS(G_BITS)) u_col (
      .clk     (clk),
      .prog_en (prog_en),
      .prog_row(prog_row),
      .prog_g  (prog_g[c]),
      .eval    (eval),
      .v_row   (v_row),
      .i_mac   (i_mac[c])
    );
  end
endmodule
