// tb_thread_monitor: runs one thread's monitor through a scripted sequence
// of windows (costly mispredictions, cheap ones, an average exactly at H,
// a single costly window, no mispredictions) plus random windows, with and
// without hysteresis. The expected priority is computed from the driven
// events by real division and a run-of-two rule kept in the testbench.
module tb_thread_monitor;
  localparam int unsigned T = 64;
  localparam int unsigned H = 4;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic mispredict = 1'b0, stall = 1'b0, window_end = 1'b0;
  logic low_h, low_n;
  always #5 clk = ~clk;

  thread_monitor #(.WINDOW_T(T), .THRESH_H(H))                  dut_h (.clk, .rst_n, .mispredict, .stall, .window_end, .low_prio(low_h));
  thread_monitor #(.WINDOW_T(T), .THRESH_H(H), .HYSTERESIS(0))  dut_n (.clk, .rst_n, .mispredict, .stall, .window_end, .low_prio(low_n));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // penalty per misprediction for scripted windows; 0: none, -1: random
  int script[] = '{9, 9, 9, 1, 1, 1, 9, 1, 4, 4, 9, 0, 0, 9, 9, 4, 1, 1,
                   -1, -1, -1, -1, -1, -1, -1, -1, -1, -1, -1, -1, -1, -1};

  initial begin
    int m_h = 0, m_n = 0, prev = 1;   // prev verdict: 2 above, 0 below, 1 none
    int lowered = 0, restored = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    foreach (script[w]) begin
      int mp, st, left, pen;
      mp = 0; st = 0; left = 0;
      for (int c = 0; c < T; c++) begin
        pen = (script[w] < 0) ? $urandom_range(1, 8) : script[w];
        // a misprediction starts a stall of pen cycles; keep it in the window
        mispredict = (left == 0 && script[w] != 0 && c + pen < T - 1 &&
                      $urandom_range(0, 3) == 0);
        stall = (left > 0);
        if (left > 0) left--;
        if (mispredict) left = pen;
        mp += mispredict; st += stall;
        window_end = (c == T - 1);
        @(posedge clk);
        @(negedge clk);
        if (!window_end) begin
          checks++;
          if (low_h !== (m_h != 0) || low_n !== (m_n != 0)) begin
            failures++; $display("FAIL mid-window change w=%0d c=%0d", w, c);
          end
        end
      end
      begin
        int v, old;
        real avg;
        avg = (mp == 0) ? 0.0 : real'(st) / real'(mp);
        v = (mp == 0) ? 0 : (avg > real'(H)) ? 2 : (avg == real'(H)) ? 1 : 0;
        old = m_h;
        if (v == 2 && prev == 2 && m_h == 0) m_h = 1;
        else if (v == 0 && prev == 0 && m_h == 1) m_h = 0;
        prev = (old != m_h) ? 1 : v;
        if (!old && m_h) lowered++;
        if (old && !m_h) restored++;
        if (v == 2) m_n = 1; else if (v == 0) m_n = 0;
      end
      checks++;
      if (low_h !== (m_h != 0)) begin
        failures++; $display("FAIL window %0d hysteresis low=%b exp=%0d (mp=%0d st=%0d)", w, low_h, m_h, mp, st);
      end
      checks++;
      if (low_n !== (m_n != 0)) begin
        failures++; $display("FAIL window %0d plain low=%b exp=%0d (mp=%0d st=%0d)", w, low_n, m_n, mp, st);
      end
    end
    checks++;
    if (lowered < 2 || restored < 2) begin
      failures++; $display("FAIL coverage lowered=%0d restored=%0d", lowered, restored);
    end
    $display("lowered=%0d restored=%0d", lowered, restored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
