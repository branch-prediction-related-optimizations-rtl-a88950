// thread_picker: the fetch thread arbiter that receives the feedback.
//
// Each cycle it picks one thread to fetch from among those whose req bit is
// set. Threads whose priority is not lowered win over lowered ones; a
// lowered thread is picked only in a cycle when no normal-priority thread
// requests. Within a level the pick is round-robin: the search starts at
// the thread after the one picked last. The scheme only says that the
// picker lowers a flagged thread's priority; the round-robin base policy and
// the strict two-level rule are this design's choice.
//
// Timing: grant, grant_valid and grant_tid follow req and low_prio
// combinationally in the same cycle; the round-robin pointer moves on the
// clock edge after a grant.
module thread_picker #(
  parameter int unsigned NUM_THREADS = bp_pkg::DEF_NUM_THREADS,
  localparam int unsigned TW         = (NUM_THREADS > 1) ? $clog2(NUM_THREADS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,        // synchronous, active low
  input  logic [NUM_THREADS-1:0] req,          // thread can be fetched
  input  logic [NUM_THREADS-1:0] low_prio,     // thread's priority is lowered
  output logic [NUM_THREADS-1:0] grant,        // one-hot picked thread
  output logic                   grant_valid,  // some thread was picked
  output logic [TW-1:0]          grant_tid     // index of the picked thread
);

  logic [TW-1:0] last_q;   // thread picked most recently

  logic [NUM_THREADS-1:0] req_hi, req_lo;
  logic                   found_hi, found_lo;
  logic [TW-1:0]          pick_hi, pick_lo;

  assign req_hi = req & ~low_prio;
  assign req_lo = req &  low_prio;

  // First requester of each level in round-robin order after last_q.
  always_comb begin
    found_hi = 1'b0;
    found_lo = 1'b0;
    pick_hi  = '0;
    pick_lo  = '0;
    for (int unsigned i = 1; i <= NUM_THREADS; i++) begin
      logic [TW-1:0] idx;
      idx = TW'((int'(last_q) + i) % NUM_THREADS);
      if (!found_hi && req_hi[idx]) begin
        found_hi = 1'b1;
        pick_hi  = TW'(idx);
      end
      if (!found_lo && req_lo[idx]) begin
        found_lo = 1'b1;
        pick_lo  = TW'(idx);
      end
    end
  end

  assign grant_valid = found_hi | found_lo;
  assign grant_tid   = found_hi ? pick_hi : pick_lo;
  assign grant       = grant_valid ? (NUM_THREADS'(1) << grant_tid) : '0;

  always_ff @(posedge clk) begin
    if (!rst_n)           last_q <= TW'(NUM_THREADS - 1);   // thread 0 first
    else if (grant_valid) last_q <= grant_tid;
  end

  // A lowered thread may only win when no normal-priority thread requests.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (grant_valid && low_prio[grant_tid]) |-> (req_hi == '0))
    else $error("thread_picker: lowered thread picked over a normal one");
  assert property (@(posedge clk) disable iff (!rst_n) grant_valid == (req != '0))
    else $error("thread_picker: grant_valid does not match requests");

endmodule
