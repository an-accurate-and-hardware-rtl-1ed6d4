// tb_sigma_estimator: self-checking test of the sigma_S update path.
//
// Part 1 drives random (S, sigma_S, count, window_end) combinations and
// compares with a real-valued model: exceed = S > sigma_S/1024, and at a
// window end sigma_S moves by (count + exceed - 20) LSBs of 1/1024, clamped
// to [0, 32767]. Part 2 closes the loop with registers held here and feeds
// zero-mean noise (sum of four uniform variables). After settling, the
// number of samples above sigma_S per 256-sample window must average close
// to the convergence factor 20, which is what the loop is built to achieve.
module tb_sigma_estimator;
  import spike_pkg::*;

  s_t     s;
  sigma_t sigma, sigma_next;
  cnt_t   cnt, cnt_next;
  logic   window_end, exceed;
  int     checks = 0, failures = 0;

  sigma_estimator dut (.*);

  task automatic cmp(string what, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("%s: s=%0d sigma=%0d cnt=%0d we=%b got %0d expected %0d",
               what, s, sigma, cnt, window_end, got, exp_v);
    end
  endtask

  function automatic int noise(int amp);  // approx. Gaussian, zero mean
    int acc = 0;
    for (int i = 0; i < 4; i++) acc += int'($urandom_range(2 * amp)) - amp;
    return acc / 2;
  endfunction

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // ---- part 1: open loop ------------------------------------------------
    for (int n = 0; n < 20000; n++) begin
      int sv, sg, cv, ex, tot, ns;
      logic we;
      sv = int'($urandom_range(63)) - 32;
      sg = (n % 7 == 0) ? int'($urandom_range(40)) : (n % 7 == 1) ? 32767 - int'($urandom_range(40))
                        : int'($urandom_range(32767));
      cv = int'($urandom_range(255));
      we = $urandom_range(1);
      s = s_t'(sv); sigma = sigma_t'(sg); cnt = cnt_t'(cv); window_end = we;
      #1;
      ex  = (real'(sv) > real'(sg) / 1024.0) ? 1 : 0;
      tot = cv + ex;
      cmp("exceed", int'(exceed), ex);
      if (we) begin
        ns = sg + tot - 20;
        if (ns < 0) ns = 0;
        if (ns > 32767) ns = 32767;
        cmp("sigma_next", int'(sigma_next), ns);
        cmp("cnt_next", int'(cnt_next), 0);
      end else begin
        cmp("sigma_next", int'(sigma_next), sg);
        cmp("cnt_next", int'(cnt_next), (tot > 255) ? 255 : tot);
      end
    end

    // ---- part 2: closed loop convergence -----------------------------------
    begin
      sigma_t sq = sigma_t'(1 << SIG_FRAC_W);  // start at 1.0
      cnt_t   cq = '0;
      int     win_cnt, sum_cnt = 0, n_win = 0;
      for (int w = 0; w < 3000; w++) begin
        win_cnt = 0;
        for (int k = 0; k < 256; k++) begin
          s = s_t'(noise(8)); sigma = sq; cnt = cq; window_end = (k == 255);
          #1;
          win_cnt += int'(exceed);
          sq = sigma_next; cq = cnt_next;
        end
        if (w >= 2500) begin sum_cnt += win_cnt; n_win++; end
      end
      checks++;
      if (sum_cnt < 15 * n_win || sum_cnt > 25 * n_win) begin
        failures++;
        $display("no convergence: mean count %0d/%0d, sigma=%0d", sum_cnt, n_win, sq);
      end else
        $display("converged: mean count per window %0.2f, sigma_S = %0.3f",
                 real'(sum_cnt) / n_win, real'(sq) / 1024.0);
      // sigma must have risen well above its start value
      checks++;
      if (sq < sigma_t'(3 << SIG_FRAC_W)) begin failures++; $display("sigma did not grow"); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
