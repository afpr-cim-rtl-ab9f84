// control_unit: phase sequencer of one AFPR-CIM macro operation.
//
// One operation runs four phases: reset (integrators, capacitor switches, flip-flops and
// mantissa registers cleared; the array currents settle), adaptive phase (sw_in closed,
// current integrated, capacitor combination adapted), a one-clock settle step after the
// sampling moment T_S (integration stopped, the adaptive control may still react to a
// crossing on the last integrating clock) and the single-slope readout (ramp and counter
// run for 32 steps). With the defaults 2 + 29 + 1 + 32 = 64 clocks, which at a 3.125 ns
// clock (32 ramp steps in 100 ns) is the 0.2 us macro latency the paper reports, with
// reset up to about 5 ns and sampling at 100 ns as in its transient waveforms. The clock
// rate and the split into clocks are this design's choices.
//
// Interface: start is sampled in IDLE; busy is high from the next clock to the end of
// readout; done pulses for one clock READ_CYC + INT_CYC + RESET_CYC + 1 clocks after the
// start edge, when all results are final. Phase outputs are registered state decodes.
module control_unit #(
  parameter int RESET_CYC = 2,
  parameter int INT_CYC   = 29,
  parameter int READ_CYC  = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy,
  output logic rst_ph,
  output logic integ,
  output logic adapt_en,
  output logic read_en,
  output logic first,
  output logic done
);
  typedef enum logic [2:0] {S_IDLE, S_RESET, S_INTEG, S_SETTLE, S_READ} state_e;

  state_e     state;
  logic [7:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      cnt  <= cnt + 1'b1;
      unique case (state)
        S_IDLE: begin
          cnt <= '0;
          if (start) state <= S_RESET;
        end
        S_RESET: if (cnt == 8'(RESET_CYC - 1)) begin
          state <= S_INTEG;
          cnt   <= '0;
        end
        S_INTEG: if (cnt == 8'(INT_CYC - 1)) begin
          state <= S_SETTLE;
          cnt   <= '0;
        end
        S_SETTLE: begin
          state <= S_READ;
          cnt   <= '0;
        end
        S_READ: if (cnt == 8'(READ_CYC - 1)) begin
          state <= S_IDLE;
          cnt   <= '0;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy     = state != S_IDLE;
    rst_ph   = state == S_RESET;
    integ    = state == S_INTEG;
    adapt_en = state == S_INTEG || state == S_SETTLE;
    read_en  = state == S_READ;
    first    = state == S_READ && cnt == '0;
  end
endmodule
