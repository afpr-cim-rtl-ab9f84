// afpr_macro: one AFPR-CIM macro, FP8 activations in, FP8 (E2M5) results out.
// Behavioural model: the row DACs, the RRAM array and the ADC front ends are analog
// models; buffers, control unit, counter and ADC digital parts are synthesizable.
//
// Data flow: the input buffer holds 576 E2M5 activations; 576 FP-DACs turn each into a
// row voltage 2^E x 1.M; the 576 x 256 RRAM array forms 256 column currents
// sum V_i G_i in parallel; 256 adaptive FP-ADCs turn each current into an E2M5 code by
// range adaptation (exponent) and single-slope readout (mantissa). Computing is in the
// integer analog domain; only the interfaces are floating point.
//
// Interface: in_wr_* loads activations one row per clock; prog_* programs the weights
// one row of conductances per clock, before inference. start begins an operation; done
// pulses 64 clocks later (default phases, see control_unit) and result[]/ovf[] then
// hold until the next start. Inputs and weights must not change while busy.
module afpr_macro
  import afpr_pkg::*;
#(
  parameter int          ROWS      = 576,
  parameter int          COLS      = 256,
  parameter int          G_BITS    = 5,
  parameter int unsigned GAIN_Q8   = 45,
  parameter int          RESET_CYC = 2,
  parameter int          INT_CYC   = 29,
  parameter int          READ_CYC  = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_wr_en,
  input  logic [$clog2(ROWS)-1:0] in_wr_row,
  input  fp8_t                    in_wr_data,
  input  logic                    prog_en,
  input  logic [$clog2(ROWS)-1:0] prog_row,
  input  logic [G_BITS-1:0]       prog_g [COLS],
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output fp8_t                    result [COLS],
  output logic                    ovf [COLS]
);
  fp8_t        act   [ROWS];
  logic [8:0]  v_row [ROWS];
  logic [31:0] i_mac [COLS];
  logic        rst_ph, integ, adapt_en, read_en, first;
  logic [4:0]  count;
  logic [31:0] vth_uv;

  input_fp_buffer #(.ROWS(ROWS)) u_inbuf (
    .clk    (clk),
    .rst_n  (rst_n),
    .wr_en  (in_wr_en),
    .wr_row (in_wr_row),
    .wr_data(in_wr_data),
    .act    (act)
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_dac
    fp_dac u_dac (
      .din  (act[r]),
      .v_dac(v_row[r])
    );
  end

  rram_crossbar #(.ROWS(ROWS), .COLS(COLS), .G_BITS(G_BITS)) u_xbar (
    .clk     (clk),
    .prog_en (prog_en),
    .prog_row(prog_row),
    .prog_g  (prog_g),
    .eval    (rst_ph),
    .v_row   (v_row),
    .i_mac   (i_mac)
  );

  control_unit #(.RESET_CYC(RESET_CYC), .INT_CYC(INT_CYC), .READ_CYC(READ_CYC)) u_ctrl (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (start),
    .busy    (busy),
    .rst_ph  (rst_ph),
    .integ   (integ),
    .adapt_en(adapt_en),
    .read_en (read_en),
    .first   (first),
    .done    (done)
  );

  sharing_unit u_share (
    .clk    (clk),
    .clr    (rst_ph),
    .read_en(read_en),
    .count  (count),
    .vth_uv (vth_uv)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_adc
    fp_adc #(.GAIN_Q8(GAIN_Q8)) u_adc (
      .clk     (clk),
      .rst     (rst_ph),
      .integ   (integ),
      .adapt_en(adapt_en),
      .read_en (read_en),
      .first   (first),
      .count   (count),
      .vth_uv  (vth_uv),
      .i_mac   (i_mac[c]),
      .result  (result[c]),
      .ovf     (ovf[c]),
      .vo_uv   ()
    );
  end
endmodule
