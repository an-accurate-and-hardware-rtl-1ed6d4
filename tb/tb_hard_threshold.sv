// tb_hard_threshold: self-checking test of the two comparators and the OR.
//
// Random and boundary TEO/threshold pairs; the expected flags are strict
// "greater than" comparisons done here on integers.
module tb_hard_threshold;
  import spike_pkg::*;

  xteo_t x_teo;
  steo_t s_teo;
  thrx_t thr_x;
  thrs_t thr_s;
  logic  det_x, det_s, spike;
  int    checks = 0, failures = 0;

  hard_threshold dut (.*);

  task automatic one(int xt, int st, int tx, int ts);
    logic ex, es;
    x_teo = xteo_t'(xt); s_teo = steo_t'(st); thr_x = thrx_t'(tx); thr_s = thrs_t'(ts);
    #1;
    ex = xt > tx; es = st > ts;
    checks += 3;
    if (det_x !== ex)        begin failures++; $display("det_x %0d>%0d got %b", xt, tx, det_x); end
    if (det_s !== es)        begin failures++; $display("det_s %0d>%0d got %b", st, ts, det_s); end
    if (spike !== (ex | es)) begin failures++; $display("spike wrong"); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    one(10, 0, 10, 0);      // equal is not above
    one(11, 0, 10, 0);
    one(0, 51, 0, 50);
    one(-128, -256, 0, 0);
    one(127, 255, 127, 255);
    one(127, 255, 126, 254);
    for (int n = 0; n < 20000; n++)
      one(int'($urandom_range(255)) - 128, int'($urandom_range(511)) - 256,
          int'($urandom_range(127)), int'($urandom_range(255)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
