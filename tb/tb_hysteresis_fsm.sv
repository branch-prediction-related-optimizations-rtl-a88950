// tb_hysteresis_fsm: feeds random sequences of window verdicts to the
// priority state with and without hysteresis and compares low_prio with a
// model that tracks runs of consecutive windows above and below H.
module tb_hysteresis_fsm;
  import bp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, eval = 1'b0;
  cmp_e cmp = CMP_BELOW;
  logic low_h, low_n;
  always #5 clk = ~clk;

  hysteresis_fsm                   dut_h (.clk, .rst_n, .eval, .cmp, .low_prio(low_h));
  hysteresis_fsm #(.HYSTERESIS(0)) dut_n (.clk, .rst_n, .eval, .cmp, .low_prio(low_n));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit m_h = 0, m_n = 0;           // model priority states
    cmp_e prev = CMP_EQUAL;         // last evaluated verdict (EQUAL: none)
    int lowered = 0, restored = 0, first_above = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 5000; c++) begin
      eval = ($urandom_range(0, 2) == 0);
      case ($urandom_range(0, 4))
        0, 1: cmp = CMP_ABOVE;
        2, 3: cmp = CMP_BELOW;
        default: cmp = CMP_EQUAL;
      endcase
      @(posedge clk);
      if (eval) begin
        bit old_h;
        old_h = m_h;
        // hysteresis: two consecutive verdicts agreeing
        if (!m_h && cmp == CMP_ABOVE && prev == CMP_ABOVE) m_h = 1;
        else if (m_h && cmp == CMP_BELOW && prev == CMP_BELOW) m_h = 0;
        if (!old_h && m_h) lowered++;
        if (old_h && !m_h) restored++;
        if (!old_h && cmp == CMP_ABOVE && prev != CMP_ABOVE) first_above++;
        // a run that has just changed the state starts over
        prev = (old_h != m_h) ? CMP_EQUAL : cmp;
        if (cmp == CMP_ABOVE) m_n = 1; else if (cmp == CMP_BELOW) m_n = 0;
      end
      @(negedge clk);
      checks++;
      if (low_h !== m_h) begin failures++; $display("FAIL hysteresis cycle %0d", c); end
      checks++;
      if (low_n !== m_n) begin failures++; $display("FAIL plain cycle %0d", c); end
    end
    // reset returns to normal priority
    rst_n = 1'b0; @(negedge clk);
    checks++;
    if (low_h || low_n) begin failures++; $display("FAIL reset"); end
    checks++;
    if (lowered == 0 || restored == 0 || first_above == 0) begin
      failures++; $display("FAIL coverage lowered=%0d restored=%0d", lowered, restored);
    end
    $display("lowered=%0d restored=%0d first windows above H=%0d", lowered, restored, first_above);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
