// clock_gate: latch-based clock gate for the register banks of an idle
// module.
//
// The enable is captured by a latch that is transparent while clk is low,
// and the gated clock is clk AND the latched enable. An enable that changes
// during the low phase therefore takes effect at the next rising edge, and
// a change during the high phase cannot cut a pulse short. This is the
// usual integrated clock-gating cell written as RTL; a standard-cell flow
// would map it to its own gating cell. test_en forces the clock on (scan).
// The source names clock gating as part of the memory bank, used so that
// only the active 32-channel module switches; the cell structure is the
// common one, not taken from the source. The latch is intended.
module clock_gate (
  input  logic clk,
  input  logic en,       // clock needed at the next rising edge
  input  logic test_en,  // force the clock on
  output logic gclk
);
  logic en_l;

  always_latch begin
    if (!clk) en_l <= en | test_en;
  end

  assign gclk = clk & en_l;
endmodule
