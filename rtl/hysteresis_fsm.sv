// hysteresis_fsm: a thread's fetch-priority state, updated once per window.
//
// With HYSTERESIS=1 (default) this is the scheme's 2-bit hysteresis: the
// priority is lowered only after two consecutive windows whose average
// stall is above H, and restored only after two consecutive windows below
// H. With HYSTERESIS=0 each window decides alone: above H lowers, below H
// restores. A window exactly at H changes nothing and, with hysteresis,
// breaks a pending run of two. The state encoding (bp_pkg::prio_state_e)
// and the handling of the equal case are this design's own.
//
// Timing: state advances on the clock edge ending a cycle with eval high;
// low_prio is a register output, valid the cycle after eval.
module hysteresis_fsm
  import bp_pkg::*;
#(
  parameter bit HYSTERESIS = bp_pkg::DEF_HYSTERESIS
) (
  input  logic clk,
  input  logic rst_n,      // synchronous, active low: normal priority
  input  logic eval,       // end of window: apply cmp
  input  cmp_e cmp,        // closing window's comparison with H
  output logic low_prio    // thread's fetch priority is lowered
);

  prio_state_e state_q, state_d;

  always_comb begin
    state_d = state_q;
    if (HYSTERESIS) begin
      unique case (state_q)
        PRIO_NORMAL:      if (cmp == CMP_ABOVE) state_d = PRIO_NORMAL_HIGH;
        PRIO_NORMAL_HIGH: state_d = (cmp == CMP_ABOVE) ? PRIO_LOWERED : PRIO_NORMAL;
        PRIO_LOWERED:     if (cmp == CMP_BELOW) state_d = PRIO_LOWERED_LOW;
        PRIO_LOWERED_LOW: state_d = (cmp == CMP_BELOW) ? PRIO_NORMAL : PRIO_LOWERED;
        default:          state_d = PRIO_NORMAL;
      endcase
    end else begin
      if (cmp == CMP_ABOVE)      state_d = PRIO_LOWERED;
      else if (cmp == CMP_BELOW) state_d = PRIO_NORMAL;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)    state_q <= PRIO_NORMAL;
    else if (eval) state_q <= state_d;
  end

  assign low_prio = state_q[1];   // PRIO_LOWERED or PRIO_LOWERED_LOW

endmodule
