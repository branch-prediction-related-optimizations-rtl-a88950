// tb_thread_picker: drives random request and lowered-priority vectors into
// the default 8-thread picker and compares every pick with a two-level
// round-robin model kept in the testbench. It also checks that a thread
// that always requests is picked at least once every NUM_THREADS cycles
// when all threads have the same priority.
module tb_thread_picker;
  localparam int unsigned N  = bp_pkg::DEF_NUM_THREADS;
  localparam int unsigned TW = $clog2(N);
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] req = '0, low_prio = '0, grant;
  logic grant_valid;
  logic [TW-1:0] grant_tid;
  always #5 clk = ~clk;

  thread_picker dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last = N - 1, exp;
    int low_wins = 0, preempt = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 20000; c++) begin
      if (c < 2000) begin            // equal priority, all requesting
        req = '1; low_prio = '0;
      end else begin
        req      = N'($urandom) & N'($urandom);
        low_prio = N'($urandom);
      end
      #1;
      exp = -1;
      for (int k = 1; k <= N && exp < 0; k++)
        if (req[(last + k) % N] && !low_prio[(last + k) % N]) exp = (last + k) % N;
      for (int k = 1; k <= N && exp < 0; k++)
        if (req[(last + k) % N]) exp = (last + k) % N;
      checks++;
      if (exp < 0) begin
        if (grant_valid || grant != '0) begin failures++; $display("FAIL grant without request"); end
      end else begin
        if (!grant_valid || grant_tid != TW'(exp) || grant != (N'(1) << exp)) begin
          failures++;
          $display("FAIL cycle %0d req=%b low=%b last=%0d got %0d exp %0d", c, req, low_prio, last, grant_tid, exp);
        end
        if (low_prio[exp]) low_wins++;
        if ((req & low_prio) != '0 && !low_prio[exp]) preempt++;
        last = exp;
      end
      if (c < 2000) begin
        checks++;
        if (grant_tid != TW'(c % N)) begin failures++; $display("FAIL rotation cycle %0d", c); end
      end
      @(negedge clk);
    end
    checks++;
    if (low_wins == 0 || preempt == 0) begin failures++; $display("FAIL coverage"); end
    $display("lowered threads picked=%0d, lowered requests passed over=%0d", low_wins, preempt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
