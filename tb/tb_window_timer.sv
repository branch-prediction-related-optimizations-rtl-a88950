// tb_window_timer: checks that window_end pulses on the last cycle of every
// window, for a short window (T=5) and for the default window length.
// Reference: a cycle counter kept by the testbench since reset release.
module tb_window_timer;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic end_s, end_d;
  always #5 clk = ~clk;

  window_timer #(.WINDOW_T(5)) dut_s (.clk, .rst_n, .window_end(end_s));
  window_timer                  dut_d (.clk, .rst_n, .window_end(end_d));

  localparam int unsigned TD = bp_pkg::DEF_WINDOW_T;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_s = 0, n_d = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 3 * TD + 7; c++) begin
      // c is the number of cycles since reset release at this negedge
      checks++;
      if (end_s !== ((c % 5) == 4)) begin
        failures++; $display("FAIL short window cycle %0d end=%b", c, end_s);
      end
      checks++;
      if (end_d !== ((c % TD) == TD - 1)) begin
        failures++; $display("FAIL default window cycle %0d end=%b", c, end_d);
      end
      n_s += end_s; n_d += end_d;
      @(negedge clk);
    end
    // reset in the middle of a window restarts it
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1;
    for (int c = 0; c < 12; c++) begin
      checks++;
      if (end_s !== ((c % 5) == 4)) begin
        failures++; $display("FAIL after re-reset cycle %0d", c);
      end
      @(negedge clk);
    end
    checks++;
    if (n_d != 3) begin failures++; $display("FAIL default windows seen %0d", n_d); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
