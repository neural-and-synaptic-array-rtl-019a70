// tb_nsat_spike_store -- testbench of the delay array.
//
// Uses a small array (N_AXON = 256) and a reference model (one set of
// pending axons per delay slot).  Over 60 time steps it sets random spikes
// with random delays through both set ports (also in the tick cycle and
// on the same axon from both ports), drains the current slot with pop
// during each step, and checks that exactly the expected axons come out in
// ascending order in the step they are due, with one axon per cycle.
`timescale 1ns/1ps
module tb_nsat_spike_store;
  import nsat_pkg::*;
  localparam int NA = 256, DS = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, tick = 0, set0 = 0, set1 = 0, pop = 0;
  logic [7:0] a0 = 0, a1 = 0; logic [3:0] d0 = 0, d1 = 0;
  logic pend_valid; logic [7:0] pend_axon; logic [3:0] cur_slot;
  nsat_spike_store #(.N_AXON(NA)) dut (.clk, .rst_n, .tick, .set0, .set0_axon(a0), .set0_delay(d0),
    .set1, .set1_axon(a1), .set1_delay(d1), .pend_valid, .pend_axon, .pop, .cur_slot);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #5_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  bit model [DS][NA];
  int cur = 0, popped = 0, delayed = 0;
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      // tick with a random set in the same cycle
      @(negedge clk); tick = 1;
      set0 = $urandom_range(0, 1); a0 = 8'($urandom); d0 = 4'($urandom);
      set1 = $urandom_range(0, 1); a1 = set0 ? a0 : 8'($urandom); d1 = d0;
      cur = (cur + 1) % DS;
      if (set0) model[(cur + d0) % DS][a0] = 1;
      if (set1) model[(cur + d1) % DS][a1] = 1;
      @(negedge clk); tick = 0; set0 = 0; set1 = 0;
      chk(int'(cur_slot) == cur, "current slot advances on tick");
      // random sets during the step
      repeat (6) begin
        @(negedge clk);
        set0 = 1; a0 = 8'($urandom); d0 = 4'($urandom_range(1, 15));
        set1 = 1; a1 = 8'($urandom); d1 = 4'($urandom_range(1, 15));
        model[(cur + d0) % DS][a0] = 1; model[(cur + d1) % DS][a1] = 1;
        delayed += 2;
      end
      @(negedge clk); set0 = 0; set1 = 0;
      // drain the current slot
      for (int a = 0; a < NA; a++)
        if (model[cur][a]) begin
          #1 chk(pend_valid && int'(pend_axon) == a, $sformatf("step %0d pending axon %0d got %0d", t, a, pend_axon));
          pop = pend_valid; @(negedge clk); pop = 0; model[cur][a] = 0; popped++;
        end
      #1 chk(!pend_valid, "slot empty after drain");
    end
    chk(popped > 100 && delayed > 0, "spikes delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
