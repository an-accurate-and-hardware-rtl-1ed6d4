// tb_clock_gate: self-checking test of the latch-based clock gate.
//
// The enable is changed at random while the clock is low (as a synchronous
// design would drive it) and at random times while the clock is high, where
// it must have no effect. Each rising edge of the gated clock must coincide
// with a rising edge of clk for which the enable (or test_en) was high
// during the preceding low phase; no other edge may appear.
module tb_clock_gate;
  logic clk = 0, en = 0, test_en = 0, gclk;
  int   checks = 0, failures = 0;
  int   n_on = 0, n_off = 0, n_glitch_try = 0;
  bit   expect_pulse;
  bit   low_phase_en;

  clock_gate dut (.*);

  always #10 clk = ~clk;

  // a rising edge of gclk outside a rising edge of clk is an error
  always @(posedge gclk) begin
    checks++;
    if (!clk) begin failures++; $display("gclk edge while clk low at %0t", $time); end
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      #2;
      en      = $urandom_range(1);
      test_en = ($urandom_range(9) == 0);
      low_phase_en = en | test_en;
      @(posedge clk);
      #1;
      checks++;
      if (gclk !== low_phase_en) begin
        failures++;
        $display("gclk=%b, enable in low phase %b at %0t", gclk, low_phase_en, $time);
      end
      if (low_phase_en) n_on++; else n_off++;
      // change the enable in the high phase: the pulse must stay as it is
      #3;
      en = ~en; n_glitch_try++;
      #2;
      checks++;
      if (gclk !== low_phase_en) begin failures++; $display("enable change cut or made a pulse"); end
      #2;
      test_en = 0;
    end
    checks++;
    if (n_on == 0 || n_off == 0) failures++;
    $display("pulses passed %0d, blocked %0d, high-phase enable changes %0d", n_on, n_off, n_glitch_try);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
