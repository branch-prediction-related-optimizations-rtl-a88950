// window_timer: marks the observation windows of T cycles.
//
// A modulo-T cycle counter starts at 0 after reset and window_end is high
// on the cycle the counter holds T-1, the last cycle of each window. All
// per-thread monitors evaluate their counts on that cycle and begin a new
// window on the next one. The window itself follows the scheme; the reset
// value and the position of the pulse are this design's choice.
//
// Timing: the first window_end comes T cycles after reset is released
// (cycle T-1 counting from 0), then every T cycles.
module window_timer #(
  parameter int unsigned WINDOW_T = bp_pkg::DEF_WINDOW_T
) (
  input  logic clk,
  input  logic rst_n,       // synchronous, active low
  output logic window_end   // last cycle of the current window
);

  localparam int unsigned TW = (WINDOW_T > 1) ? $clog2(WINDOW_T) : 1;

  logic [TW-1:0] cycle_q;

  assign window_end = (cycle_q == TW'(WINDOW_T - 1));

  always_ff @(posedge clk) begin
    if (!rst_n)          cycle_q <= '0;
    else if (window_end) cycle_q <= '0;
    else                 cycle_q <= cycle_q + 1'b1;
  end

  initial begin
    assert (WINDOW_T >= 2) else $error("window_timer: WINDOW_T must be at least 2");
  end

endmodule
