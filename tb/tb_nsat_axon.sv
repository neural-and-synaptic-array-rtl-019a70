// tb_nsat_axon -- testbench of the axon module.
//
// 32 slots (4 rows), tested with one-component (log2k = 0) and
// two-component (log2k = 1) neurons.  Random routing entries (disabled,
// route back with a delay, route out to a core and axon) are written
// through the configuration bus and read back.  Rows of random spikes are
// then presented as the evaluation pipeline would, one per cycle, while
// pkt_ready is randomly low.  Checks: every spiking neuron with an
// enabled entry produces exactly one routed-back spike or one spike packet
// with its entry's fields, lowest neuron first, disabled neurons produce
// nothing, spikes arriving while earlier ones are still queued are not
// lost, and the counters match.
`timescale 1ns/1ps
module tb_nsat_axon;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  cfg_bus_t cfg = '0; logic [15:0] rdata; logic [1:0] log2k = 0;
  logic spk_valid = 0; logic [1:0] spk_row = 0; logic [7:0] spk_mask = 0;
  logic back_valid; logic [7:0] back_axon; logic [3:0] back_delay;
  aer_pkt_t pkt; logic pkt_ready = 0, busy; logic [31:0] n_out, n_back;
  nsat_axon #(.ROWS(4), .N_AXON(256)) dut (.clk, .rst_n, .cfg, .cfg_rdata(rdata), .log2k, .spk_valid, .spk_row,
    .spk_mask, .back_valid, .back_axon, .back_delay, .pkt, .pkt_ready, .busy, .n_out, .n_back);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #5_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic wr(int a, int d);
    @(negedge clk); cfg = '0; cfg.we = 1; cfg.sel = SEL_AXON; cfg.addr = 16'(a); cfg.wdata = 16'(d);
    @(negedge clk); cfg = '0;
  endtask

  logic [15:0] r0 [32], r1 [32];
  bit pend [32];
  int nb = 0, no = 0, last;
  always @(negedge clk) pkt_ready = $urandom_range(0, 2) != 0;
  int n;
  always @(posedge clk) if (rst_n) begin
    n = -1;
    for (int i = 31; i >= 0; i--) if (pend[i]) n = i;
    if (n >= 0 && !r0[n][15]) begin
      chk(!back_valid && !pkt.valid, "disabled neuron leaves silently");
      pend[n] = 0;
    end else if (back_valid || (pkt.valid && pkt_ready)) begin
      chk(n >= 0, "output only for a pending neuron");
      if (n >= 0) begin
        if (back_valid) begin
          chk(r0[n][14] && back_axon == r1[n][7:0] && back_delay == r0[n][11:8], "routed back fields"); nb++;
        end else begin
          chk(!r0[n][14] && pkt.spike && pkt.core_id == r0[n][5:0] && pkt.delay == r0[n][11:8] &&
              pkt.neuron_id == r1[n], "packet fields"); no++;
        end
        pend[n] = 0;
      end
    end
    if (spk_valid)
      for (int l = 0; l < 8; l++) if (spk_mask[l]) pend[({spk_row, 3'(l)}) >> log2k] = 1;
  end
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    for (int n = 0; n < 32; n++) begin
      r0[n] = {($urandom_range(0, 4) != 0), 1'($urandom), 2'b0, 4'($urandom), 2'b0, 6'($urandom)};
      r1[n] = 16'($urandom);
      wr(2*n, r0[n]); wr(2*n + 1, r1[n]);
    end
    cfg.sel = SEL_AXON; cfg.addr = 16'(2*7+1); #1 chk(rdata == r1[7], "entry read-back"); cfg = '0;
    for (int mode = 0; mode < 2; mode++) begin
      log2k = 2'(mode);
      for (int it = 0; it < 40; it++) begin
        @(negedge clk);
        spk_valid = 1; spk_row = 2'($urandom); spk_mask = 8'($urandom);
        if (mode == 1) spk_mask = spk_mask & 8'h55;   // lane 0 of each neuron
        @(negedge clk); spk_valid = 0;
        repeat ($urandom_range(0, 6)) @(negedge clk);
      end
      while (busy) @(negedge clk);
      repeat (3) @(negedge clk);
      for (int i = 0; i < 32; i++) chk(!pend[i], "every spike routed");
    end
    chk(int'(n_back) == nb && int'(n_out) == no && nb > 10 && no > 10, "counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
