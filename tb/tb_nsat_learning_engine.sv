// tb_nsat_learning_engine -- testbench of the three-factor STDP engine.
//
// Small engine (16 axons, 32 slots, 8-component neurons).  Directed
// sequences of pre spikes (pre_clr), post spikes (spk_*) and time steps
// (tick) set the STDP counters; the combinational synapse port is then
// compared with the rule worked out by hand:
//   causal + acausal at a pre spike, causal only in the expiry pass,
//   no update outside the window, clipping to [-128, 127], the
//   exponential kernel, the state-dependent rule (STDP off, acausal
//   pipeline only), randomized rounding (the average over all random
//   values equals the exact quotient), learn_en gating, expiry of a pre
//   counter after tstdp steps in ascending axon order, and counters that
//   saturate instead of wrapping.
`timescale 1ns/1ps
module tb_nsat_learning_engine;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  cfg_bus_t cfg = '0;
  logic learn_en = 1; logic [7:0] tstdp = 8; logic [3:0] rr_bits = 0;
  logic tick = 0, pre_clr = 0, exp_clr = 0, spk_valid = 0;
  logic [3:0] pre_axon = 0, exp_clr_axon = 0, exp_axon, c_axon = 0;
  logic [1:0] spk_row = 0; logic [7:0] spk_mask = 0;
  logic exp_valid, c_causal_only = 0, c_update, c_ch, c_ah;
  logic [4:0] c_dest = 0; logic [2:0] c_grp = 0; state_t c_mod = 0; weight_t c_w = 0, c_new_w;
  logic [15:0] c_rand = 0;
  nsat_learning_engine #(.N_AXON(16), .ROWS(4)) dut (.clk, .rst_n, .cfg, .log2k(2'd3), .learn_en, .tstdp, .rr_bits,
    .tick, .pre_clr, .pre_axon, .exp_clr, .exp_clr_axon, .spk_valid, .spk_row, .spk_mask, .exp_valid, .exp_axon,
    .c_axon, .c_causal_only, .c_dest, .c_grp, .c_mod, .c_w, .c_rand, .c_new_w, .c_update,
    .c_causal_hit(c_ch), .c_acausal_hit(c_ah));
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #1_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic lp(int p, int d);
    @(negedge clk); cfg = '0; cfg.we = 1; cfg.sel = SEL_LPAR; cfg.addr = 16'(p); cfg.wdata = 16'(d);
    @(negedge clk); cfg = '0;
  endtask
  task automatic ticks(int n);
    repeat (n) begin @(negedge clk); tick = 1; @(negedge clk); tick = 0; end
  endtask
  task automatic pre(int a);
    @(negedge clk); pre_clr = 1; pre_axon = 4'(a); @(negedge clk); pre_clr = 0;
  endtask
  task automatic post(int n);
    @(negedge clk); spk_valid = 1; spk_row = 2'(n); spk_mask = 8'h01; @(negedge clk); spk_valid = 0;
  endtask
  task automatic syn(int a, int dest, bit co, int m, int w);
    c_axon = 4'(a); c_dest = 5'(dest); c_causal_only = co; c_mod = state_t'(m); c_w = weight_t'(w); #1;
  endtask

  int sum;
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    lp(LP_FLAGS, 3);
    lp(LP_TCA0, 255); lp(LP_TCA1, 255); lp(LP_HICA0, 0); lp(LP_SICA, 0);
    lp(LP_TAC0, 255); lp(LP_TAC1, 255); lp(LP_HIAC0, 5'h1f); lp(LP_SIAC, 1);
    // never-spiked counters: no update
    syn(2, 0, 0, 40, 10);
    chk(!c_update, "no update before any spike");
    pre(2); ticks(3); post(0); ticks(2);          // cpre = 5, cpost = 2
    syn(2, 0, 0, 40, 10);
    chk(c_ch && c_ah && c_update, "causal and acausal hit");
    chk(c_new_w == 8'sd30, $sformatf("w = 10 + 40 - 20 = 30, got %0d", c_new_w));
    syn(2, 0, 0, 100, 120);
    chk(c_new_w == 8'sd127, "clip at 127");
    syn(2, 0, 0, -300, -100);
    chk(c_new_w == -8'sd128, "clip at -128");
    syn(2, 0, 1, 40, 10);
    chk(c_ch && !c_ah && c_new_w == 8'sd50, "causal-only pass adds the causal part only");
    // exponential kernel: e = 2 - (dt >> 1), dt = 3 -> e = 1
    lp(LP_FLAGS, 7); lp(LP_HICA0, 2); lp(LP_SLCA0, 1); lp(LP_HIAC0, 5'h1f); lp(LP_SLAC0, 0);
    syn(2, 0, 1, 40, 0);
    chk(c_new_w == 8'sd80, $sformatf("exponential kernel 40<<1, got %0d", c_new_w));
    // state-dependent rule: plastic, STDP off -> -(x_m >> 1) at each pre spike only
    lp(LP_FLAGS, 1);
    syn(2, 0, 0, 40, 0);
    chk(c_ah && !c_ch && c_new_w == -8'sd20, "state rule on the acausal pipeline");
    syn(2, 0, 1, 40, 0);
    chk(!c_update, "state rule not in the causal-only pass");
    // randomized rounding of dw = -20 with r = 4: mean over all randoms = -20/16
    lp(LP_FLAGS, 9); lp(LP_HIAC0, 5'h1f); rr_bits = 4;
    sum = 0;
    for (int r = 0; r < 16; r++) begin c_rand = 16'(r); syn(2, 0, 0, 40, 0); sum += int'(c_new_w); end
    chk(sum == -20, $sformatf("randomized rounding is unbiased (%0d)", sum));
    rr_bits = 0;
    learn_en = 0; syn(2, 0, 0, 40, 0); chk(!c_update, "learn_en gates updates"); learn_en = 1;
    // window: post far before the pre spike -> no acausal hit
    lp(LP_FLAGS, 3);
    post(1); ticks(9); pre(5);
    syn(5, 8, 0, 40, 0);
    chk(!c_ah && !c_ch, "outside the window no update");
    // expiry: axon 2 pre at step 0 of its counter (now 5+9 = 14 steps) expired already
    chk(exp_valid && exp_axon == 4'd2, "axon 2 expired");
    @(negedge clk); exp_clr = 1; exp_clr_axon = 2; @(negedge clk); exp_clr = 0;
    chk(!exp_valid, "expired flag cleared");
    pre(7); pre(4); ticks(7);
    chk(!exp_valid, "not expired before tstdp steps");
    ticks(1);
    chk(exp_valid && exp_axon == 4'd4, "lowest expired axon first");
    @(negedge clk); exp_clr = 1; exp_clr_axon = 4; @(negedge clk); exp_clr = 0;
    chk(exp_valid && exp_axon == 4'd5, "next expired axon (5, pre spike before the window)");
    // saturating counters
    ticks(300);
    syn(7, 0, 1, 40, 0);
    chk(!c_update, "saturated counters mean never");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
