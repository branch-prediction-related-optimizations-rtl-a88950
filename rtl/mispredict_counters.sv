// mispredict_counters: the two per-thread window counters of the scheme.
//
// The Branch Misprediction Counter counts cycles in which a branch of the
// thread resolved as mispredicted; the Branch Mis-prediction Stall Cycles
// counter counts cycles the thread spends stalled because of a
// misprediction. Both are running counts over the current window.
//
// mp_total and stall_total are the counts including the present cycle's
// events, so on the window_end cycle they are the totals of the closing
// window; the counters then restart at zero. The counter width,
// $clog2(WINDOW_T+1), holds one event per cycle for a whole window, so no
// saturation logic is needed. Counting follows the scheme; the width and
// the treatment of the window_end cycle are this design's choice.
module mispredict_counters #(
  parameter int unsigned WINDOW_T = bp_pkg::DEF_WINDOW_T,
  localparam int unsigned CW      = $clog2(WINDOW_T + 1)
) (
  input  logic          clk,
  input  logic          rst_n,        // synchronous, active low
  input  logic          mispredict,   // a misprediction of this thread this cycle
  input  logic          stall,        // a misprediction stall cycle of this thread
  input  logic          window_end,   // last cycle of the window
  output logic [CW-1:0] mp_total,     // mispredictions so far, this cycle included
  output logic [CW-1:0] stall_total   // stall cycles so far, this cycle included
);

  logic [CW-1:0] mp_q, stall_q;

  assign mp_total    = mp_q    + CW'(mispredict);
  assign stall_total = stall_q + CW'(stall);

  always_ff @(posedge clk) begin
    if (!rst_n || window_end) begin
      mp_q    <= '0;
      stall_q <= '0;
    end else begin
      mp_q    <= mp_total;
      stall_q <= stall_total;
    end
  end

endmodule
