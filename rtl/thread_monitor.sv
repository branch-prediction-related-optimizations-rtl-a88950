// thread_monitor: branch-misprediction monitor of one hardware thread.
//
// Chains the window counters (mispredict_counters), the comparison of the
// average stall per misprediction with H (avg_stall_compare) and the
// priority state (hysteresis_fsm). Its output is the feedback the scheme
// sends to the thread picker: high while the thread's priority is lowered.
//
// Timing: the window's totals are compared combinationally on the
// window_end cycle; low_prio changes on the following cycle.
module thread_monitor
  import bp_pkg::*;
#(
  parameter int unsigned WINDOW_T   = bp_pkg::DEF_WINDOW_T,
  parameter int unsigned THRESH_H   = bp_pkg::DEF_THRESH_H,
  parameter bit          HYSTERESIS = bp_pkg::DEF_HYSTERESIS
) (
  input  logic clk,
  input  logic rst_n,        // synchronous, active low
  input  logic mispredict,   // misprediction of this thread this cycle
  input  logic stall,        // misprediction stall cycle of this thread
  input  logic window_end,   // last cycle of the window
  output logic low_prio      // feedback to the picker
);

  localparam int unsigned CW = $clog2(WINDOW_T + 1);

  logic [CW-1:0] mp_total, stall_total;
  cmp_e          cmp;

  mispredict_counters #(.WINDOW_T(WINDOW_T)) u_counters (
    .clk, .rst_n, .mispredict, .stall, .window_end,
    .mp_total, .stall_total
  );

  avg_stall_compare #(.WINDOW_T(WINDOW_T), .THRESH_H(THRESH_H)) u_compare (
    .mp_total, .stall_total, .cmp
  );

  hysteresis_fsm #(.HYSTERESIS(HYSTERESIS)) u_prio (
    .clk, .rst_n, .eval(window_end), .cmp, .low_prio
  );

endmodule
