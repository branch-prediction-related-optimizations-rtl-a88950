// tb_mispredict_counters: drives random misprediction and stall streams and
// compares the running totals with counts kept by the testbench, including
// the restart after each window_end and a window where every cycle counts.
module tb_mispredict_counters;
  localparam int unsigned T  = 16;
  localparam int unsigned CW = $clog2(T + 1);
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic mispredict = 1'b0, stall = 1'b0, window_end = 1'b0;
  logic [CW-1:0] mp_total, stall_total;
  always #5 clk = ~clk;

  mispredict_counters #(.WINDOW_T(T)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mp_m = 0, st_m = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 20 * T; c++) begin
      int w;
      w = c / T;
      window_end = ((c % T) == T - 1);
      if (w == 3) begin           // saturated window: every cycle an event
        mispredict = 1'b1; stall = 1'b1;
      end else begin
        mispredict = ($urandom_range(0, 3) == 0);
        stall      = ($urandom_range(0, 1) == 0);
      end
      mp_m += mispredict; st_m += stall;
      #1;
      checks++;
      if (mp_total !== CW'(mp_m) || stall_total !== CW'(st_m)) begin
        failures++;
        $display("FAIL cycle %0d mp %0d/%0d stall %0d/%0d", c, mp_total, mp_m, stall_total, st_m);
      end
      if (window_end) begin mp_m = 0; st_m = 0; end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
