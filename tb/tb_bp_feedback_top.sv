// tb_bp_feedback_top: end-to-end run of the feedback fetch scheduler with
// every parameter at its default (8 threads, T=1024, H=8, hysteresis on).
//
// Each thread is a small pipeline model: when it is not stalled it
// mispredicts now and then, and each misprediction stalls it for a penalty
// of P cycles, during which it raises br_stall and does not request fetch.
// The penalty per thread and window is scripted so that:
//   thread 0  costly (P=20) for windows 0-4, cheap (P=2) afterwards:
//             lowered after two windows, restored after two cheap ones;
//   thread 1  always cheap (P=3): never lowered;
//   thread 2  costly in window 2 only: a single window, suppressed by the
//             hysteresis;
//   thread 3  P=8 = H exactly: an average equal to H, never lowered;
//   thread 4  never mispredicts;
//   threads 5-7 random penalties 1-20 per misprediction.
// Stalls are kept inside a window so that every window's average is exact.
// Every 64 cycles there is a 16-cycle quiet phase in which only threads 0
// and 2 request, so a lowered thread is picked when nothing else is ready.
//
// The testbench keeps its own per-thread counts, computes each window's
// average by real division, tracks the two-window rule, and checks
// low_prio every cycle and every pick against a two-level round-robin
// model. It counts each mechanism (window end, lowering, restoring,
// suppressed spike, equal-to-H window, lowered thread passed over, lowered
// thread picked) and fails if one never happened.
module tb_bp_feedback_top;
  import bp_pkg::*;
  localparam int unsigned N  = DEF_NUM_THREADS;
  localparam int unsigned T  = DEF_WINDOW_T;
  localparam int unsigned H  = DEF_THRESH_H;
  localparam int unsigned TW = $clog2(N);
  localparam int unsigned WINDOWS = 10;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] fetch_req = '0, br_mispredict = '0, br_stall = '0;
  logic [N-1:0] fetch_grant, low_prio;
  logic fetch_valid, window_end;
  logic [TW-1:0] fetch_tid;
  always #5 clk = ~clk;

  bp_feedback_top dut (.*);

  initial begin
    repeat ((WINDOWS + 2) * T) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int penalty(int t, int w);
    case (t)
      0: return (w <= 4) ? 20 : 2;
      1: return 3;
      2: return (w == 2) ? 20 : 0;
      3: return 8;
      4: return 0;
      default: return $urandom_range(1, 20);
    endcase
  endfunction

  initial begin
    int left[N], mp[N], st[N], prev[N];
    bit m_low[N];
    int last = N - 1;
    int n_windows = 0, n_lowered = 0, n_restored = 0, n_spike = 0, n_equal = 0;
    int n_passed = 0, n_low_pick = 0, n_grants = 0;
    foreach (left[t]) begin left[t] = 0; mp[t] = 0; st[t] = 0; prev[t] = 1; m_low[t] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < WINDOWS * T; c++) begin
      int w, cw, exp;
      bit quiet;
      w = c / T; cw = c % T;
      quiet = (c % 64) >= 48;
      for (int t = 0; t < N; t++) begin
        int pen;
        pen = penalty(t, w);
        br_stall[t] = (left[t] > 0);
        if (left[t] > 0) left[t]--;
        br_mispredict[t] = (left[t] == 0 && !br_stall[t] && pen > 0 &&
                            cw + pen < int'(T) - 1 && $urandom_range(0, 15) == 0);
        if (br_mispredict[t]) left[t] = pen;
        fetch_req[t] = !br_stall[t] && (!quiet || t == 0 || t == 2) &&
                       ($urandom_range(0, 3) != 0);
        mp[t] += br_mispredict[t];
        st[t] += br_stall[t];
      end
      #1;
      // window boundary
      checks++;
      if (window_end !== (cw == int'(T) - 1)) begin
        failures++; $display("FAIL window_end at cycle %0d", c);
      end
      // priority state before this cycle's edge
      for (int t = 0; t < N; t++) begin
        checks++;
        if (low_prio[t] !== m_low[t]) begin
          failures++; $display("FAIL cycle %0d thread %0d low_prio=%b exp=%b", c, t, low_prio[t], m_low[t]);
        end
      end
      // pick
      exp = -1;
      for (int k = 1; k <= N && exp < 0; k++)
        if (fetch_req[(last + k) % N] && !m_low[(last + k) % N]) exp = (last + k) % N;
      for (int k = 1; k <= N && exp < 0; k++)
        if (fetch_req[(last + k) % N]) exp = (last + k) % N;
      checks++;
      if (exp < 0) begin
        if (fetch_valid) begin failures++; $display("FAIL pick without request cycle %0d", c); end
      end else begin
        if (!fetch_valid || fetch_tid != TW'(exp) || fetch_grant != (N'(1) << exp)) begin
          failures++; $display("FAIL cycle %0d pick %0d exp %0d", c, fetch_tid, exp);
        end
        n_grants++;
        if (m_low[exp]) n_low_pick++;
        for (int t = 0; t < N; t++) if (fetch_req[t] && m_low[t] && t != exp) begin n_passed++; break; end
        last = exp;
      end
      @(posedge clk);
      if (cw == int'(T) - 1) begin
        n_windows++;
        for (int t = 0; t < N; t++) begin
          int v;
          bit old;
          real avg;
          avg = (mp[t] == 0) ? 0.0 : real'(st[t]) / real'(mp[t]);
          v = (mp[t] == 0) ? 0 : (avg > real'(H)) ? 2 : (avg == real'(H)) ? 1 : 0;
          if (v == 1) n_equal++;
          old = m_low[t];
          if (v == 2 && prev[t] == 2 && !old) m_low[t] = 1;
          else if (v == 0 && prev[t] == 0 && old) m_low[t] = 0;
          if (!old && v == 2 && !m_low[t] && prev[t] != 2 && t == 2) n_spike++;
          if (!old && m_low[t]) n_lowered++;
          if (old && !m_low[t]) n_restored++;
          prev[t] = (old != m_low[t]) ? 1 : v;
          mp[t] = 0; st[t] = 0;
        end
      end
      @(negedge clk);
    end
    // scripted outcomes
    checks++;
    if (m_low[1] || m_low[2] || m_low[3] || m_low[4]) begin
      failures++; $display("FAIL a thread that should stay at normal priority was lowered");
    end
    $display("windows=%0d lowered=%0d restored=%0d suppressed_spikes=%0d equal_to_H=%0d",
             n_windows, n_lowered, n_restored, n_spike, n_equal);
    $display("picks=%0d lowered_thread_picked=%0d lowered_thread_passed_over=%0d",
             n_grants, n_low_pick, n_passed);
    checks++; if (n_windows == 0)  begin failures++; $display("FAIL no window end"); end
    checks++; if (n_lowered == 0)  begin failures++; $display("FAIL no lowering"); end
    checks++; if (n_restored == 0) begin failures++; $display("FAIL no restoring"); end
    checks++; if (n_spike == 0)    begin failures++; $display("FAIL no suppressed spike"); end
    checks++; if (n_equal == 0)    begin failures++; $display("FAIL no window at H"); end
    checks++; if (n_low_pick == 0) begin failures++; $display("FAIL lowered thread never picked"); end
    checks++; if (n_passed == 0)   begin failures++; $display("FAIL lowered thread never passed over"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
