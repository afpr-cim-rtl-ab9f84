// afpr_cim_top: AFPR-CIM accelerator core: four analog floating-point CIM macros and
// the digital FP back end (partial accumulator, activation, pooling, output buffer).
// Behavioural model at the top level, because the macros contain analog models.
//
// Operation. Weights are programmed into the macros' RRAM arrays before inference
// (prog_*, one row of 256 conductance levels per clock, macro chosen by prog_macro).
// Activations are loaded into the macros' input buffers (in_*, one row per clock).
// start runs all four macros in lock step: each converts its 576 activations with the
// FP-DACs, forms 256 analog MACs and reads them out through the adaptive FP-ADCs as
// E2M5 codes after 64 clocks. The back end then adds the partial sums of the macros
// selected by acc_mask (subtracting those in acc_neg) and rescales by acc_shift,
// applies act_mode, and max-pools over pool_win consecutive operations. A finished
// vector lands in the output buffer: out_valid pulses, out_vec holds it and
// out_rd_addr/out_rd_data read it word by word.
//
// Timing: done pulses 64 clocks after start. The back end adds three register stages
// plus the output register, so out_valid follows done by 4 clocks when pool_win
// completes a window. Inputs, weights and configuration must be stable from start to
// out_valid.
// macro_result and macro_ovf expose the raw ADC codes of every macro.
module afpr_cim_top
  import afpr_pkg::*;
#(
  parameter int          NMACRO  = 4,
  parameter int          ROWS    = 576,
  parameter int          COLS    = 256,
  parameter int          G_BITS  = 5,
  parameter int unsigned GAIN_Q8 = 45
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // weight programming
  input  logic                      prog_en,
  input  logic [$clog2(NMACRO)-1:0] prog_macro,
  input  logic [$clog2(ROWS)-1:0]   prog_row,
  input  logic [G_BITS-1:0]         prog_g [COLS],
  // activation loading
  input  logic                      in_wr_en,
  input  logic [$clog2(NMACRO)-1:0] in_macro,
  input  logic [$clog2(ROWS)-1:0]   in_row,
  input  fp8_t                      in_data,
  // operation and back-end configuration
  input  logic                      start,
  input  logic [NMACRO-1:0]         acc_mask,
  input  logic [NMACRO-1:0]         acc_neg,
  input  logic [1:0]                acc_shift,
  input  act_mode_e                 act_mode,
  input  logic [3:0]                pool_win,
  // status and results
  output logic                      busy,
  output logic                      done,
  output fp8_t                      macro_result [NMACRO][COLS],
  output logic                      macro_ovf [NMACRO][COLS],
  output logic                      acc_sat,
  output logic [$clog2(COLS+1)-1:0] act_n_relu,
  output logic [$clog2(COLS+1)-1:0] act_n_clip,
  output logic                      out_valid,
  output fp8_t                      out_vec [COLS],
  input  logic [$clog2(COLS)-1:0]   out_rd_addr,
  output fp8_t                      out_rd_data
);
  logic [NMACRO-1:0] m_busy, m_done;
  logic              acc_valid, act_valid, pool_valid;
  fp8_t              acc_out  [COLS];
  fp8_t              act_out  [COLS];
  fp8_t              pool_out [COLS];

  for (genvar k = 0; k < NMACRO; k++) begin : g_macro
    afpr_macro #(.ROWS(ROWS), .COLS(COLS), .G_BITS(G_BITS), .GAIN_Q8(GAIN_Q8)) u_macro (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_wr_en  (in_wr_en && in_macro == k),
      .in_wr_row (in_row),
      .in_wr_data(in_data),
      .prog_en   (prog_en && prog_macro == k),
      .prog_row  (prog_row),
      .prog_g    (prog_g),
      .start     (start),
      .busy      (m_busy[k]),
      .done      (m_done[k]),
      .result    (macro_result[k]),
      .ovf       (macro_ovf[k])
    );
  end

  always_comb begin
    busy = |m_busy;
    done = &m_done;
  end

  partial_accumulator #(.NMACRO(NMACRO), .COLS(COLS)) u_acc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (done),
    .din      (macro_result),
    .mask     (acc_mask),
    .neg      (acc_neg),
    .shift    (acc_shift),
    .out_valid(acc_valid),
    .dout     (acc_out),
    .sat      (acc_sat)
  );

  activation_unit #(.COLS(COLS)) u_act (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (acc_valid),
    .mode     (act_mode),
    .din      (acc_out),
    .out_valid(act_valid),
    .dout     (act_out),
    .n_relu   (act_n_relu),
    .n_clip   (act_n_clip)
  );

  pooling_unit #(.COLS(COLS)) u_pool (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (act_valid),
    .win      (pool_win),
    .din      (act_out),
    .out_valid(pool_valid),
    .dout     (pool_out)
  );

  output_fp_buffer #(.COLS(COLS)) u_obuf (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (pool_valid),
    .din    (pool_out),
    .rd_addr(out_rd_addr),
    .rd_data(out_rd_data),
    .vec    (out_vec),
    .valid  ()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= pool_valid;
  end
endmodule
