// tb_nsat_core -- testbench of one NSAT core at full size.
//
// Drives the core's packet ports directly.  The core is configured by
// memory write packets for one-component neurons: neurons 0 and 1 have
// bias 100 and threshold 200 (a spike every second step); neuron 0 is
// routed out to core 7, neuron 1 is routed back with delay 0 to axon 2,
// whose single synapse (weight 50) feeds slot 3.  Ten time steps are run.
// Checks: 5 spike packets with the routing entry's fields leave the core,
// 5 spikes are routed back and walked, slot 3 holds 4 x 50 = 200 (the
// spike of step 10 only reaches the neuron in step 11; read
// with a memory read packet, response fields checked), each step takes
// at least ROWS + 4 cycles, the step counter, and that the core clock
// was gated while idle.
`timescale 1ns/1ps
module tb_nsat_core;
  import nsat_pkg::*;
  localparam int ROWS = N_SLOTS / N_COMP;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, test_en = 0, rx_ready, tx_ready = 1, start_tstep = 0, done_tstep;
  aer_pkt_t rx_pkt = '0, tx_pkt;
  logic [31:0] n_steps, n_causal_walks, n_spike_walks, n_updates, n_drops, n_spikes_out, n_spikes_back, gated_cycles;
  nsat_core #(.CORE_ID(6'd1)) dut (.*);
  always #2.5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #5_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  aer_pkt_t q [$], resp [$];
  int nout = 0, t;
  bit acc = 0;
  always @(negedge clk) if (!rx_pkt.valid || acc) rx_pkt = (q.size() != 0) ? q.pop_front() : '0;
  always @(posedge clk) begin
    acc = rx_pkt.valid && rx_ready;
    if (tx_pkt.valid && tx_ready) begin
      if (tx_pkt.spike) begin chk(tx_pkt.core_id == 6'd7 && tx_pkt.neuron_id == 16'd44 && tx_pkt.delay == 4'd3, "spike packet fields"); nout++; end
      else resp.push_back(tx_pkt);
    end
  end
  function automatic aer_pkt_t mk(bit w, bit r, bit i, int sel, int v);
    aer_pkt_t p = '0;
    p.valid = 1; p.wr = w; p.rd = r; p.init = i; p.core_id = 6'd1; p.delay = 4'(sel); p.neuron_id = 16'(v);
    return p;
  endfunction
  task automatic wr(int sel, int a, int d);
    q.push_back(mk(1, 0, 1, sel, a)); q.push_back(mk(1, 0, 0, 0, d));
  endtask
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    wr(SEL_GCFG, G_LOG2K, 0);
    wr(SEL_NGRP, 0, 1); wr(SEL_NGRP, 1, 1);
    wr(SEL_NPAR, (1 << 7) | NP_BIAS, 100); wr(SEL_NPAR, (1 << 7) | NP_XTHR, 200); wr(SEL_NPAR, (1 << 7) | NP_FLAGS, 5);
    wr(SEL_AXON, 0, 16'h8307); wr(SEL_AXON, 1, 44);
    wr(SEL_AXON, 2, 16'hc000); wr(SEL_AXON, 3, 2);
    wr(SEL_PTR, 2*4, 10); wr(SEL_PTR, 2*4+1, 1); wr(SEL_PTR, 2*4+2, 3);
    wr(SEL_WDATA, 10, 50);
    while (q.size() != 0 || rx_pkt.valid) @(posedge clk);
    repeat (20) @(posedge clk);
    for (int s = 0; s < 10; s++) begin
      @(negedge clk) start_tstep = 1; @(negedge clk) start_tstep = 0; t = 1;
      while (!done_tstep) begin @(negedge clk); t++; end
      chk(t >= ROWS + 4 && t < ROWS + 200, $sformatf("step length %0d", t));
      repeat (50) @(negedge clk);
    end
    q.push_back(mk(0, 1, 0, SEL_STATE, 3));
    t = 0; while (resp.size() == 0 && t < 1000) begin @(posedge clk); t++; end
    chk(resp.size() == 1 && resp[0].rd && resp[0].init && resp[0].core_id == 6'd1 && resp[0].delay == 4'(SEL_STATE) &&
        resp[0].neuron_id == 16'd200, "slot 3 holds 4 x 50 (the last spike counts in step 11)");
    chk(nout == 5 && n_spikes_out == 5, "five spikes routed out");
    chk(n_spikes_back == 5 && n_spike_walks == 5, "five spikes routed back and walked");
    chk(n_steps == 10, "step counter");
    chk(gated_cycles > 100, "clock gated while idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
