// tb_threshold_generator: self-checking test of Thr_X and Thr_S (Eq. 2).
//
// Sweeps every integer part of sigma_S with random fractions through two
// instances: the default coefficients (C1 = 4, C2 = 2, C3 = 1/2) and a set
// with larger coefficients (C1 = 2, C2 = 8, C3 = 2) that saturates early. Expected values
// are computed with real-valued products and saturation.
module tb_threshold_generator;
  import spike_pkg::*;

  sigma_t sigma;
  thrx_t  tx_a, tx_b;
  thrs_t  ts_a, ts_b;
  int     checks = 0, failures = 0;

  threshold_generator dut_a (.sigma(sigma), .thr_x(tx_a), .thr_s(ts_a));
  threshold_generator #(.C1_EXP(1), .C2_EXP(3), .C3_EXP(1)) dut_b (
    .sigma(sigma), .thr_x(tx_b), .thr_s(ts_b));

  function automatic int expect_thr(real c_lin, real c_sq, int si, int maxv);
    int v = int'($floor(c_lin * si) + $floor(c_sq * si * si));
    return (v > maxv) ? maxv : v;
  endfunction

  task automatic cmp(string what, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("%s: sigma=%0d got %0d expected %0d", what, sigma, got, exp_v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int si = 0; si < 32; si++) begin
      for (int r = 0; r < 4; r++) begin
        sigma = sigma_t'(si * 1024 + ((r == 0) ? 0 : int'($urandom_range(1023))));
        #1;
        cmp("A thr_x", int'(tx_a), expect_thr(4.0, 0.0, si, 127));
        cmp("A thr_s", int'(ts_a), expect_thr(2.0, 0.5, si, 255));
        cmp("B thr_x", int'(tx_b), expect_thr(2.0, 0.0, si, 127));
        cmp("B thr_s", int'(ts_b), expect_thr(8.0, 2.0, si, 255));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
