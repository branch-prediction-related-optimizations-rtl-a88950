// tb_avg_stall_compare: compares the block's verdict with the average
// stall per misprediction computed by real division in the testbench, for
// the default H and T and for a second H, on corner and random values.
module tb_avg_stall_compare;
  import bp_pkg::*;
  localparam int unsigned T  = DEF_WINDOW_T;
  localparam int unsigned CW = $clog2(T + 1);
  int checks = 0, failures = 0;
  logic [CW-1:0] mp_total, stall_total;
  cmp_e cmp_d, cmp_3;

  avg_stall_compare                          dut_d (.mp_total, .stall_total, .cmp(cmp_d));
  avg_stall_compare #(.WINDOW_T(T), .THRESH_H(3)) dut_3 (.mp_total, .stall_total, .cmp(cmp_3));

  function automatic cmp_e expect_cmp(int unsigned mp, int unsigned st, int unsigned h);
    real avg;
    if (mp == 0) return CMP_BELOW;
    avg = real'(st) / real'(mp);
    if (avg > real'(h))  return CMP_ABOVE;
    if (avg == real'(h)) return CMP_EQUAL;
    return CMP_BELOW;
  endfunction

  task automatic apply(int unsigned mp, int unsigned st);
    mp_total = CW'(mp); stall_total = CW'(st);
    #1;
    checks++;
    if (cmp_d !== expect_cmp(mp, st, DEF_THRESH_H)) begin
      failures++; $display("FAIL H=%0d mp=%0d st=%0d got %s", DEF_THRESH_H, mp, st, cmp_d.name());
    end
    checks++;
    if (cmp_3 !== expect_cmp(mp, st, 3)) begin
      failures++; $display("FAIL H=3 mp=%0d st=%0d got %s", mp, st, cmp_3.name());
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_above = 0, n_equal = 0, n_below = 0;
    apply(0, 0); apply(0, T); apply(1, 8); apply(1, 9); apply(1, 7);
    apply(3, 24); apply(3, 25); apply(3, 9); apply(3, 10); apply(T, T);
    apply(T / 8, T); apply(T / 8 - 1, T); apply(T / 8 + 1, T);
    for (int unsigned mp = 0; mp <= 40; mp++)
      for (int unsigned st = 0; st <= 400; st += 3) apply(mp, st);
    for (int i = 0; i < 20000; i++) begin
      int unsigned mp, st;
      mp = $urandom_range(0, T);
      st = $urandom_range(0, T);
      apply(mp, st);
      if (cmp_d == CMP_ABOVE) n_above++; else if (cmp_d == CMP_EQUAL) n_equal++; else n_below++;
    end
    $display("random: above=%0d equal=%0d below=%0d", n_above, n_equal, n_below);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
