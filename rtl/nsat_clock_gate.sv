// nsat_clock_gate -- behavioural model of an integrated clock-gating cell.
//
// Behavioural model: in silicon this is a library ICG cell.  The enable is
// captured by a latch that is transparent while clk is low, and the
// gated clock is clk AND the latched enable, so gclk never glitches and a
// change of en shows at the next rising edge of clk.  test_en forces the
// clock on.  The always-on interface of each NSAT core uses it to stop the
// core clock when the core has nothing to do, as the paper describes.
module nsat_clock_gate (
  input  logic clk,
  input  logic en,
  input  logic test_en,
  output logic gclk
);

  logic en_l;

  always_latch
    if (!clk) en_l = en | test_en;

  assign gclk = clk & en_l;

endmodule
