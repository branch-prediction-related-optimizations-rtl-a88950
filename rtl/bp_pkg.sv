// bp_pkg: types and default sizes shared by the branch-misprediction
// feedback fetch scheduler.
//
// The scheme keeps, for every hardware thread, the number of branch
// mispredictions and misprediction stall cycles in a window of T cycles.
// At the end of each window the average stall per misprediction is compared
// with a threshold H, and a thread whose average is too high has its fetch
// priority lowered until its average drops below H again.
//
// The defaults below are this design's own choice: the scheme names T and H
// and a thread count but gives no values for them.
package bp_pkg;

  // Default number of hardware threads served by the picker.
  localparam int unsigned DEF_NUM_THREADS = 8;
  // Default window length T, in clock cycles.
  localparam int unsigned DEF_WINDOW_T    = 1024;
  // Default threshold H on the average stall per misprediction, in cycles.
  localparam int unsigned DEF_THRESH_H    = 8;
  // 1: two consecutive windows are needed to change a thread's priority.
  localparam bit          DEF_HYSTERESIS  = 1'b1;

  // Outcome of comparing one window's average stall with H.
  typedef enum logic [1:0] {
    CMP_BELOW = 2'd0,   // average < H, or no misprediction in the window
    CMP_EQUAL = 2'd1,   // average == H: neither lowers nor restores
    CMP_ABOVE = 2'd2    // average > H
  } cmp_e;

  // Two-bit per-thread priority state with hysteresis.
  typedef enum logic [1:0] {
    PRIO_NORMAL      = 2'b00, // normal priority
    PRIO_NORMAL_HIGH = 2'b01, // normal, one window above H seen
    PRIO_LOWERED     = 2'b10, // lowered priority
    PRIO_LOWERED_LOW = 2'b11  // lowered, one window below H seen
  } prio_state_e;

endpackage
