// tb_nsat_tile -- end-to-end and full-size testbench of the NSAT tile.
//
// Runs the tile at its default (full) size: four cores of 4096 slots and
// 64K weight words.  A model of the USB FIFO bridge feeds 32-bit packet
// words to the tile and collects what comes back, with random back-pressure
// on the transmit side.  The host program configures all four cores with
// memory write packets, reads words back with memory read packets, injects
// spikes and runs 20 time steps with start_tstep / done_tstep.
//   core 0  one-component neurons (mode switch to log2k = 0), learning on:
//           neuron 0 spikes every second step and is routed back into the
//           core with delay 2 onto two plastic synapses (shared pointer
//           target with a host-driven axon that later expires and gets a
//           causal-only pass); neuron 1 is routed out to core 1
//   core 1  receives the routed-out spikes
//   core 2  a host spike with delay 2: the weight must reach neuron 0
//           exactly after step t+2
//   core 3  a 64-synapse fanout with blank-out probability 1/2
// Each mechanism is counted (mode switch, read responses, route back,
// route out, delayed delivery, causal-only walks, weight updates,
// blank-out drops, clock gating, transmit back-pressure, foreign packet
// drop) and the test fails if one never happened.  The step length is
// checked against the neuron evaluation rate of one row per cycle.
`timescale 1ns/1ps
module tb_nsat_tile;
  import nsat_pkg::*;

  localparam int ROWS = N_SLOTS / N_COMP;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 1, test_en = 0;
  logic ft_rxf_n = 1, ft_txe_n = 0;
  logic [31:0] ft_data_in = '0;
  logic ft_oe_n, ft_rd_n, ft_wr_n;
  logic [31:0] ft_data_out;
  logic start_tstep = 0;
  logic [3:0] done_tstep;
  logic [3:0][7:0][31:0] core_stats;
  logic [31:0] n_routed, n_dropped, n_host_rx, n_host_tx;

  nsat_tile dut (.*);

  always #2.5 clk = ~clk;   // 200 MHz

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ bridge model
  logic [31:0] hq[$];
  logic [31:0] rq[$];
  int tx_stall = 0;
  always @(negedge clk) begin
    ft_rxf_n   <= (hq.size() == 0);
    ft_data_in <= (hq.size() != 0) ? hq[0] : 32'h0;
    ft_txe_n   <= ($urandom_range(0, 3) == 0);
  end
  always @(posedge clk) begin
    if (!ft_rd_n && !ft_rxf_n) void'(hq.pop_front());
    if (!ft_wr_n && !ft_txe_n) rq.push_back(ft_data_out);
    if (ft_txe_n && rq_wait) tx_stall++;
  end
  bit rq_wait = 0;

  function automatic logic [31:0] w_init(int core, int sel, int addr);
    return {1'b1, 1'b0, 1'b0, 1'b1, 2'b00, 6'(core), 4'(sel), 16'(addr)};
  endfunction
  function automatic logic [31:0] w_data(int core, int data);
    return {1'b1, 1'b0, 1'b0, 1'b0, 2'b00, 6'(core), 4'h0, 16'(data)};
  endfunction
  function automatic logic [31:0] w_rd(int core, int sel, int addr);
    return {1'b0, 1'b1, 1'b0, 1'b0, 2'b00, 6'(core), 4'(sel), 16'(addr)};
  endfunction
  function automatic logic [31:0] w_spk(int core, int delay, int axon);
    return {1'b0, 1'b0, 1'b1, 1'b0, 2'b00, 6'(core), 4'(delay), 16'(axon)};
  endfunction

  task automatic wr(int core, int sel, int addr, int data);
    hq.push_back(w_init(core, sel, addr));
    hq.push_back(w_data(core, data));
  endtask

  task automatic drain();
    while (hq.size() != 0) @(posedge clk);
    repeat (40) @(posedge clk);
  endtask

  int n_resp = 0;
  task automatic rd(int core, int sel, int addr, output int data);
    int t = 0;
    hq.push_back(w_rd(core, sel, addr));
    rq_wait = 1;
    while (rq.size() == 0 && t < 5000) begin @(posedge clk); t++; end
    rq_wait = 0;
    chk(rq.size() != 0, "read response arrives");
    if (rq.size() != 0) begin
      logic [31:0] w = rq.pop_front();
      chk(w[30] && w[28] && int'(w[25:20]) == core && int'(w[19:16]) == sel, "response header");
      data = int'(w[15:0]);
      n_resp++;
    end else data = -1;
  endtask

  // ------------------------------------------------------------- steps
  logic [3:0] seen;
  int step_cycles;
  always @(posedge clk) seen <= start_tstep ? 4'b0 : (seen | done_tstep);

  task automatic step();
    int t = 0;
    @(negedge clk) start_tstep = 1;
    @(negedge clk) start_tstep = 0;
    t = 1;
    while (seen != 4'hf && t < 200000) begin @(posedge clk); t++; end
    step_cycles = t;
    chk(seen == 4'hf, "all cores finish the step");
    chk(t >= ROWS + 4, "step no shorter than one row per cycle");
  endtask

  initial begin
    #40_000_000;
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int v, n_mode = 0, n_delay = 0;
  initial begin
    #1 rst_n = 0;   // a falling edge: the gated core clocks do not run in reset
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // core 0: one-component neurons, learning
    wr(0, SEL_GCFG, G_LOG2K, 0);
    wr(0, SEL_GCFG, G_FLAGS, 1);
    wr(0, SEL_GCFG, G_TSTDP, 8);
    wr(0, SEL_NGRP, 0, 1);  wr(0, SEL_NGRP, 1, 1);
    wr(0, SEL_NGRP, 10, 2); wr(0, SEL_NGRP, 12, 2);
    wr(0, SEL_NPAR, (1 << 7) | NP_BIAS, 100);
    wr(0, SEL_NPAR, (1 << 7) | NP_XTHR, 200);
    wr(0, SEL_NPAR, (1 << 7) | NP_FLAGS, 5);
    wr(0, SEL_NPAR, (2 << 7) | NP_XTHR, 25);
    wr(0, SEL_NPAR, (2 << 7) | NP_FLAGS, 5);
    wr(0, SEL_NPAR, (2 << 7) | NP_TREF, 1);
    wr(0, SEL_LPAR, (2 << 8) | LP_FLAGS, 3);
    wr(0, SEL_LPAR, (2 << 8) | LP_TCA0, 255); wr(0, SEL_LPAR, (2 << 8) | LP_TCA1, 255);
    wr(0, SEL_LPAR, (2 << 8) | LP_TAC0, 255); wr(0, SEL_LPAR, (2 << 8) | LP_TAC1, 255);
    wr(0, SEL_LPAR, (2 << 8) | LP_HICA0, 0);
    wr(0, SEL_LPAR, (2 << 8) | LP_HIAC0, 5'h1e);
    wr(0, SEL_LPAR, (2 << 8) | LP_SIAC, 1);
    wr(0, SEL_AXON, 0, 16'hc200); wr(0, SEL_AXON, 1, 5);
    wr(0, SEL_AXON, 2, 16'h8001); wr(0, SEL_AXON, 3, 3);
    wr(0, SEL_PTR, 5*4+0, 100); wr(0, SEL_PTR, 5*4+1, 2); wr(0, SEL_PTR, 5*4+2, 10);
    wr(0, SEL_PTR, 7*4+0, 100); wr(0, SEL_PTR, 7*4+1, 2); wr(0, SEL_PTR, 7*4+2, 10);
    wr(0, SEL_WDATA, 100, 16'h0014); wr(0, SEL_WDATA, 101, 16'h011e);
    // core 1: target of routed-out spikes
    wr(1, SEL_PTR, 3*4+0, 0); wr(1, SEL_PTR, 3*4+1, 1); wr(1, SEL_PTR, 3*4+2, 0);
    wr(1, SEL_WDATA, 0, 5);
    // core 2: delayed host spike
    wr(2, SEL_PTR, 0, 0); wr(2, SEL_PTR, 1, 1); wr(2, SEL_PTR, 2, 0);
    wr(2, SEL_WDATA, 0, 37);
    // core 3: blank-out
    wr(3, SEL_PTR, 0, 0); wr(3, SEL_PTR, 1, 64); wr(3, SEL_PTR, 2, 0);
    hq.push_back(w_init(3, SEL_WDATA, 0));
    for (int i = 0; i < 64; i++) hq.push_back(w_data(3, 1));
    for (int c = 0; c < N_COMP; c++) wr(3, SEL_NPAR, (c << 4) | NP_PROB, 128);
    // a packet for another tile
    hq.push_back(w_spk(6'b000100, 0, 0));
    drain();

    rd(0, SEL_GCFG, G_LOG2K, v);  chk(v == 0, "core 0 in one-component mode");
    if (v == 0) n_mode++;
    rd(2, SEL_GCFG, G_LOG2K, v);  chk(v == 3, "core 2 keeps eight-component mode");
    rd(0, SEL_PTR, 5*4+1, v);     chk(v == 2, "pointer count readback");
    rd(3, SEL_WDATA, 5, v);       chk(v == 1, "weight readback");
    chk(n_dropped == 1, "foreign packet dropped by the router");

    hq.push_back(w_spk(2, 2, 0));
    hq.push_back(w_spk(0, 0, 7));
    drain();
    for (int s = 1; s <= 20; s++) begin
      hq.push_back(w_spk(3, 0, 0));
      drain();
      step();
      if (s <= 3) begin
        rd(2, SEL_STATE, 0, v);
        chk(v == ((s == 3) ? 37 : 0), $sformatf("delayed spike visible only after step %0d (step %0d: %0d)", 3, s, v));
        if (s == 3 && v == 37) n_delay++;
      end
    end
    rd(1, SEL_STATE, 0, v);  chk(v > 0, "core 1 neuron received routed-out spikes");
    rd(2, SEL_STATE, 0, v);  chk(v == 37, "core 2 neuron keeps its input");

    $display("core0 back=%0d out=%0d causal=%0d updates=%0d  core1 walks=%0d  core3 drops=%0d walks=%0d",
             core_stats[0][6], core_stats[0][5], core_stats[0][1], core_stats[0][3],
             core_stats[1][2], core_stats[3][4], core_stats[3][2]);
    $display("gated cycles %0d %0d %0d %0d  resp=%0d tx_stall=%0d routed=%0d",
             core_stats[0][7], core_stats[1][7], core_stats[2][7], core_stats[3][7], n_resp, tx_stall, n_routed);
    chk(n_mode > 0, "mechanism: mode switch");
    chk(n_resp >= 4, "mechanism: memory read responses");
    chk(core_stats[0][6] > 0, "mechanism: route back");
    chk(core_stats[0][5] > 0 && core_stats[1][2] > 0, "mechanism: route out to another core");
    chk(n_delay > 0, "mechanism: axonal delay");
    chk(core_stats[0][1] > 0, "mechanism: causal-only pass of expired axon");
    chk(core_stats[0][3] > 0, "mechanism: plastic weight updates");
    chk(core_stats[3][4] > 0 && core_stats[3][4] < 64 * 20, "mechanism: blank-out drops some, not all");
    chk(core_stats[3][2] == 20, "core 3 one walk per injected spike");
    for (int c = 0; c < 4; c++) chk(core_stats[c][7] > 0, "mechanism: clock gating");
    chk(tx_stall > 0, "mechanism: transmit back-pressure");
    for (int c = 0; c < 4; c++) chk(core_stats[c][0] == 20, "step counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
