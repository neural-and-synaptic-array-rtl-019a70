// tb_nsat_neuron_eval -- testbench of the neuron evaluation unit.
//
// Small unit (4 rows = 32 slots).  The testbench plays the accumulator:
// it answers every row request one cycle later with a constant input of 5
// per component.  Neurons of group 1 get bias 10, threshold 25 and reset
// to 0.  Checks: a pass takes exactly ROWS + 4 cycles from start to done
// (one row per cycle plus the 4-stage pipeline), the state after one step
// (x = 15, read back through the configuration bus), a spike every second
// step for every one-component neuron, only lane 0 flagged per neuron in
// eight-component mode (log2k = 3), fewer spikes with a refractory
// period, group 0 neurons (spikes disabled) never fire, and the query port
// returning group and blank-out probability of a slot.
`timescale 1ns/1ps
module tb_nsat_neuron_eval;
  import nsat_pkg::*;
  localparam int R = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  cfg_bus_t cfg = '0; logic [15:0] rdata; logic [1:0] log2k = 0;
  logic start = 0, busy, done, acc_rd_en; logic [1:0] acc_rd_row;
  logic signed [N_COMP-1:0][ACC_W-1:0] acc_rd_data;
  logic spk_valid; logic [1:0] spk_row; logic [7:0] spk_mask;
  logic [4:0] q_slot = 0; logic [2:0] q_grp; state_t q_mod; logic [7:0] q_prob;
  nsat_neuron_eval #(.ROWS(R)) dut (.*, .cfg_rdata(rdata));
  always #5 clk = ~clk;
  always @(posedge clk) for (int l = 0; l < N_COMP; l++) acc_rd_data[l] <= acc_rd_en ? 16'sd5 : 16'sd0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #5_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic wr(cfg_sel_e sel, int a, int d);
    @(negedge clk); cfg = '0; cfg.we = 1; cfg.sel = sel; cfg.addr = 16'(a); cfg.wdata = 16'(d);
    @(negedge clk); cfg = '0;
  endtask
  int spikes [32]; int nsp, t;
  always @(posedge clk) if (spk_valid) for (int l = 0; l < 8; l++) if (spk_mask[l]) begin
    spikes[(int'(spk_row) * 8 + l) >> log2k]++; nsp++;
  end
  task automatic pass();
    @(negedge clk); start = 1; @(negedge clk); start = 0; t = 1;
    while (!done) begin @(negedge clk); t++; end
    chk(t == R + 4, $sformatf("pass length %0d cycles", t));
  endtask
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    for (int n = 0; n < 32; n++) if (n != 5) wr(SEL_NGRP, n, 1);
    wr(SEL_NPAR, (1 << 7) | NP_BIAS, 10); wr(SEL_NPAR, (1 << 7) | NP_XTHR, 25);
    wr(SEL_NPAR, (1 << 7) | NP_FLAGS, 5); wr(SEL_NPAR, (1 << 7) | NP_PROB, 77);
    q_slot = 9; #1 chk(q_grp == 1 && q_prob == 77, "query port group and probability");
    q_slot = 5; #1 chk(q_grp == 0 && q_prob == 0, "query port other group");
    pass();
    cfg.sel = SEL_STATE; cfg.addr = 16'd9; #1 chk(rdata == 16'd15, $sformatf("x after one step %0d", rdata)); cfg = '0;
    nsp = 0; for (int n = 0; n < 32; n++) spikes[n] = 0;
    repeat (9) pass();
    for (int n = 0; n < 32; n++) chk(spikes[n] == ((n == 5) ? 0 : 5), $sformatf("neuron %0d spikes %0d", n, spikes[n]));
    // refractory period
    wr(SEL_NPAR, (1 << 7) | NP_TREF, 3);
    nsp = 0; for (int n = 0; n < 32; n++) spikes[n] = 0;
    repeat (10) pass();
    chk(spikes[0] > 0 && spikes[0] < 5, $sformatf("refractory period slows spiking (%0d)", spikes[0]));
    // eight-component neurons: only lane 0 reported
    wr(SEL_NPAR, (1 << 7) | NP_TREF, 0);
    log2k = 3;
    for (int n = 0; n < 4; n++) wr(SEL_NGRP, n, 1);
    nsp = 0; for (int n = 0; n < 32; n++) spikes[n] = 0;
    repeat (6) pass();
    chk(nsp > 0 && nsp == spikes[0] + spikes[1] + spikes[2] + spikes[3], "one flag per eight-component neuron");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
