// avg_stall_compare: compares a window's average misprediction stall with H.
//
// The scheme's metric is AverageBranchMispredictStall = stall cycles /
// mispredictions, tested against a threshold H. Since the count is
// positive, avg > H is the same as stall > H * count, so this block forms
// the product with a constant multiplier and compares, giving the exact
// result of the real-valued division without a divider (this design's
// choice). A window with no misprediction is reported as below H.
//
// Purely combinational. cmp is CMP_ABOVE, CMP_EQUAL or CMP_BELOW.
module avg_stall_compare
  import bp_pkg::*;
#(
  parameter int unsigned WINDOW_T = bp_pkg::DEF_WINDOW_T,
  parameter int unsigned THRESH_H = bp_pkg::DEF_THRESH_H,
  localparam int unsigned CW      = $clog2(WINDOW_T + 1)
) (
  input  logic [CW-1:0] mp_total,     // mispredictions in the window
  input  logic [CW-1:0] stall_total,  // stall cycles in the window
  output cmp_e          cmp
);

  localparam int unsigned HW = (THRESH_H > 0) ? $clog2(THRESH_H + 1) : 1;
  localparam int unsigned PW = CW + HW;

  logic [PW-1:0] limit;   // H * mispredictions
  logic [PW-1:0] stall_w;

  assign limit   = PW'(mp_total) * PW'(THRESH_H);
  assign stall_w = PW'(stall_total);

  always_comb begin
    if (mp_total == '0)        cmp = CMP_BELOW;
    else if (stall_w > limit)  cmp = CMP_ABOVE;
    else if (stall_w == limit) cmp = CMP_EQUAL;
    else                       cmp = CMP_BELOW;
  end

endmodule
