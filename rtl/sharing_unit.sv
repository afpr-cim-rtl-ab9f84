// sharing_unit: the resources that all ADC columns of a macro share.
// Behavioural model: it contains the analog V_th/ramp generator model next to the
// synthesizable readout counter.
//
// The 5-bit counter and the threshold/ramp generator serve all 256 columns. While
// read_en is low the counter is held at zero and V_th is 2 V; while read_en is high
// the counter steps once per clock and the ramp follows it. The paper names a
// "DAC & ADC sharing unit" without detail; its content here is the "column sharing"
// part of the paper's FP-ADC schematic. clr clears the counter (reset phase).
module sharing_unit (
  input  logic        clk,
  input  logic        clr,
  input  logic        read_en,
  output logic [4:0]  count,
  output logic [31:0] vth_uv
);
  ss_counter #(.WIDTH(5)) u_cnt (
    .clk  (clk),
    .clr  (clr),
    .en   (read_en),
    .count(count)
  );

  vth_ramp_gen u_ramp (
    .ramp_en(read_en),
    .count  (count),
    .vth_uv (vth_uv)
  );
endmodule
