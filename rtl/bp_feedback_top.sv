// bp_feedback_top: branch-misprediction feedback fetch scheduler.
//
// In a multithreaded processor a thread going through a phase of costly
// branch mispredictions fills the shared pipeline with wrong-path work.
// This block watches every hardware thread's mispredictions and the stall
// cycles they cause over windows of WINDOW_T cycles, and when a thread's
// average stall per misprediction exceeds THRESH_H (for two windows in a
// row with HYSTERESIS=1) it lowers that thread's priority in the fetch
// thread picker. The priority is restored when the average falls below
// THRESH_H again (twice in a row with hysteresis).
//
// Structure: one window_timer, NUM_THREADS thread_monitor instances and one
// thread_picker. The processor pipeline is outside: it reports
// mispredictions (br_mispredict) and misprediction stall cycles (br_stall)
// per thread, tells which threads can fetch (fetch_req) and fetches from the
// thread named by fetch_grant / fetch_tid.
//
// Timing: the pick is combinational from fetch_req in the same cycle. A
// window closes on the cycle window_end is high and low_prio reflects it
// from the next cycle.
module bp_feedback_top #(
  parameter int unsigned NUM_THREADS = bp_pkg::DEF_NUM_THREADS,
  parameter int unsigned WINDOW_T    = bp_pkg::DEF_WINDOW_T,
  parameter int unsigned THRESH_H    = bp_pkg::DEF_THRESH_H,
  parameter bit          HYSTERESIS  = bp_pkg::DEF_HYSTERESIS,
  localparam int unsigned TW         = (NUM_THREADS > 1) ? $clog2(NUM_THREADS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,          // synchronous, active low
  input  logic [NUM_THREADS-1:0] fetch_req,      // threads ready to fetch
  input  logic [NUM_THREADS-1:0] br_mispredict,  // per-thread misprediction event
  input  logic [NUM_THREADS-1:0] br_stall,       // per-thread misprediction stall cycle
  output logic [NUM_THREADS-1:0] fetch_grant,    // one-hot thread to fetch from
  output logic                   fetch_valid,    // a thread was picked
  output logic [TW-1:0]          fetch_tid,      // index of the picked thread
  output logic [NUM_THREADS-1:0] low_prio,       // per-thread lowered priority
  output logic                   window_end      // last cycle of each window
);

  window_timer #(.WINDOW_T(WINDOW_T)) u_timer (
    .clk, .rst_n, .window_end
  );

  for (genvar t = 0; t < NUM_THREADS; t++) begin : g_thread
    thread_monitor #(
      .WINDOW_T  (WINDOW_T),
      .THRESH_H  (THRESH_H),
      .HYSTERESIS(HYSTERESIS)
    ) u_monitor (
      .clk, .rst_n,
      .mispredict(br_mispredict[t]),
      .stall     (br_stall[t]),
      .window_end,
      .low_prio  (low_prio[t])
    );
  end

  thread_picker #(.NUM_THREADS(NUM_THREADS)) u_picker (
    .clk, .rst_n,
    .req        (fetch_req),
    .low_prio,
    .grant      (fetch_grant),
    .grant_valid(fetch_valid),
    .grant_tid  (fetch_tid)
  );

endmodule
