// tb_nsat_core_ctrl -- testbench of the core control unit.
//
// The testbench models the blocks around the control unit: a delay array
// (a queue of pending axons), expired STDP counters (a queue), a weight
// memory that is busy for a random number of cycles per walk, and a neuron
// evaluation that reports done a fixed time after eval_start.  Over 30
// steps with random loads it checks the phase order of each step
// (one tick, then every causal-only walk, then eval_start, then the
// spike walks, then done_tstep), that causal walks happen only with
// learning enabled, that every pending spike is walked once with
// pre_clr and every expired axon with exp_clr, that spikes arriving
// between steps are walked while idle, that only one walk runs at a time,
// and that core_idle is low whenever work is left.
`timescale 1ns/1ps
module tb_nsat_core_ctrl;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, start_tstep = 0, done_tstep, learn_en = 1;
  logic tick, eval_start, eval_done = 0, axon_busy = 0, pend_valid, pop, exp_valid, exp_clr, pre_clr;
  logic [7:0] pend_axon, exp_axon, cur_axon, req_axon;
  logic req_valid, syn_ready, causal_only, core_idle;
  logic [31:0] n_steps, n_causal_walks, n_spike_walks;
  nsat_core_ctrl #(.N_AXON(256)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #20_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int pq [$], eq [$];
  int busy_cnt = 0, ev_cnt = -1, phase = 0, walks_pre = 0, walks_exp = 0, idle_walks = 0, nwalk = 0;
  assign pend_valid = pq.size() != 0;
  assign pend_axon  = pend_valid ? 8'(pq[0]) : '0;
  assign exp_valid  = eq.size() != 0;
  assign exp_axon   = exp_valid ? 8'(eq[0]) : '0;
  assign syn_ready  = (busy_cnt == 0);
  always @(posedge clk) if (rst_n) begin
    if (pop) void'(pq.pop_front());
    if (req_valid) begin
      busy_cnt <= $urandom_range(1, 6);
      if (phase == 0) idle_walks++;
      if (phase == 2) chk(exp_valid && req_axon == exp_axon, "causal walk of an expired axon");
      if (phase == 3 || phase == 0) chk(pop, "spike walk pops the delay array");
      chk(phase != 1, "no walk between tick and causal phase");
    end else if (busy_cnt != 0) busy_cnt <= busy_cnt - 1;
    if (exp_clr) begin chk(eq.size() != 0 && cur_axon == 8'(eq[0]), "exp_clr of the walked axon"); void'(eq.pop_front()); walks_exp++; end
    if (pre_clr) walks_pre++;
    if (tick) begin chk(phase == 0 || phase == 1, "tick starts the step"); phase = 2; end
    if (eval_start) begin chk(phase == 2 && (!exp_valid || !learn_en), "evaluation after the causal phase"); phase = 3; ev_cnt = 20; end
    eval_done <= (ev_cnt == 1);
    if (ev_cnt > 0) ev_cnt--;
    if (done_tstep) begin chk(phase == 3 && !pend_valid, "done after all spikes"); phase = 0; end
    if (!core_idle) ; else chk(!pend_valid && phase <= 1, "core_idle only without work");
  end
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    for (int s = 0; s < 30; s++) begin
      learn_en = (s % 5 != 4);
      repeat ($urandom_range(0, 4)) pq.push_back($urandom_range(0, 255));
      repeat ($urandom_range(0, 3)) eq.push_back($urandom_range(0, 255));
      repeat (30) @(negedge clk);
      @(negedge clk) start_tstep = 1; phase = 1;
      @(negedge clk) start_tstep = 0;
      // spikes arriving during the step
      repeat ($urandom_range(0, 3)) pq.push_back($urandom_range(0, 255));
      while (phase != 0) @(negedge clk);
      if (!learn_en) eq.delete();
    end
    repeat (30) @(negedge clk);
    chk(int'(n_steps) == 30, "step counter");
    chk(int'(n_causal_walks) == walks_exp && walks_exp > 0, "every causal walk clears its axon");
    chk(int'(n_spike_walks) == walks_pre && walks_pre > 0, "every spike walk clears the pre counter");
    chk(idle_walks > 0, "spikes between steps are walked while idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
