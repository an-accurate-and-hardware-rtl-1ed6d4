// tb_smooth_teo: self-checking test of the smoothing and TEO unit.
//
// Drives random four-sample histories plus the extreme corners and compares
// S[n], X_TEO[n-1] and S_TEO[n-1] with integer arithmetic done here:
// S[k] = floor((X[k] + X[k-1]) / 4), T = c*c - n*p, truncated by floor
// division by 64 (X) and 8 (S). The unit is combinational; a watchdog ends
// the run if it stalls.
module tb_smooth_teo;
  import spike_pkg::*;

  x_t    x0, x1, x2, x3;
  s_t    s0;
  xteo_t x_teo;
  steo_t s_teo;
  int    checks = 0, failures = 0;

  smooth_teo dut (.*);

  function automatic int fdiv(int a, int d);   // floor division
    int q = a / d;
    if ((a % d != 0) && (a < 0)) q--;
    return q;
  endfunction

  function automatic int sat(int v, int lo, int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  task automatic check_one(int a0, int a1, int a2, int a3);
    int e0, e1, e2, ex, es;
    x0 = x_t'(a0); x1 = x_t'(a1); x2 = x_t'(a2); x3 = x_t'(a3);
    #1;
    e0 = fdiv(a0 + a1, 4);
    e1 = fdiv(a1 + a2, 4);
    e2 = fdiv(a2 + a3, 4);
    ex = sat(fdiv(a1 * a1 - a0 * a2, 64), -128, 127);
    es = sat(fdiv(e1 * e1 - e0 * e2, 8), -256, 255);
    checks += 3;
    if (int'(s0) != e0)    begin failures++; $display("S mismatch %0d %0d %0d %0d: %0d vs %0d", a0, a1, a2, a3, s0, e0); end
    if (int'(x_teo) != ex) begin failures++; $display("XTEO mismatch %0d %0d %0d: %0d vs %0d", a0, a1, a2, x_teo, ex); end
    if (int'(s_teo) != es) begin failures++; $display("STEO mismatch: %0d vs %0d", s_teo, es); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c[4] = '{-64, 63, 0, -1};
    foreach (c[i]) foreach (c[j]) foreach (c[k]) foreach (c[l]) check_one(c[i], c[j], c[k], c[l]);
    for (int n = 0; n < 20000; n++)
      check_one(int'($urandom_range(127)) - 64, int'($urandom_range(127)) - 64,
                int'($urandom_range(127)) - 64, int'($urandom_range(127)) - 64);
    // a spike-like ramp: TEO must be large and positive at the peak
    check_one(10, 60, 10, 0);
    if (!(x_teo > 40)) failures++;
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
