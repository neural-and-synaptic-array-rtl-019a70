// tb_nsat_clock_gate -- testbench of the clock gate.
//
// Drives random enable patterns, changed only while the clock is high as a
// register on the rising edge would, and checks on every rising edge that
// the gated clock pulses exactly when en (or test_en) was set, and that
// the gated clock never rises while the clock is low (no glitches: enable
// changes inside the high phase do not reach the output).
`timescale 1ns/1ps
module tb_nsat_clock_gate;
  int checks = 0, failures = 0;
  logic clk = 0, en = 0, test_en = 0, gclk;
  nsat_clock_gate dut (.clk, .en, .test_en, .gclk);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #1_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int pulses = 0, expect_p = 0, glitches = 0;
  logic en_q;
  always @(posedge gclk) begin pulses++; if (!clk) glitches++; end
  initial begin
    @(posedge clk); #1;
    for (int i = 0; i < 400; i++) begin
      en = $urandom_range(0, 1); test_en = ($urandom_range(0, 9) == 0);
      #2 if ($urandom_range(0, 1)) en = ~en;   // change inside the high phase
      #1 en = en;
      en_q = en | test_en;
      @(negedge clk); #1;
      if (en_q) expect_p++;
      @(posedge clk); #1;
      chk(gclk == en_q, "gated clock follows the enable latched in the low phase");
    end
    chk(pulses == expect_p, $sformatf("pulse count %0d vs %0d", pulses, expect_p));
    chk(glitches == 0, "no rising edge while the clock is low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
