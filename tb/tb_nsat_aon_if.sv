// tb_nsat_aon_if -- testbench of the always-on interface of a core.
//
// The testbench plays the core: core_idle is driven at random, gclk edges
// are counted, configuration reads return a function of the address, and
// the axon module offers spike packets.  Checks: gclk runs in every cycle
// where a packet is waiting, start_tstep is high or the core is busy, and
// is stopped otherwise (gated_cycles counts exactly those cycles, and
// test_en forces it on); spikes pass to spk_* at once, configuration
// writes only while the core is idle; read responses and axon spikes
// both reach tx_pkt with the right fields.
`timescale 1ns/1ps
module tb_nsat_aon_if;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, test_en = 0, tx_ready = 1, start_tstep = 0, core_idle = 1, rx_ready, gclk;
  aer_pkt_t rx_pkt = '0, tx_pkt, axon_pkt = '0; logic axon_ready;
  logic spk_valid; logic [15:0] spk_axon, cfg_rdata; logic [3:0] spk_delay; cfg_bus_t cfg;
  logic [31:0] gated_cycles;
  nsat_aon_if #(.CORE_ID(6'd2)) dut (.*);
  assign cfg_rdata = ~cfg.addr;
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #5_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int gedges = 0, cycles = 0, off = 0, nspk = 0, nwr = 0, nresp = 0, nout = 0, sent = 0;
  always @(posedge gclk) gedges++;
  bit acc_rx = 0, acc_ax = 0, en_exp = 0;
  always @(negedge clk) begin #1 en_exp = dut.fifo_busy || start_tstep || !core_idle || test_en; end
  always @(negedge clk) if (rst_n) begin
    if (!rx_pkt.valid || acc_rx) begin
      rx_pkt = '0;
      if (sent < 600 && $urandom_range(0, 3) == 0) begin
        rx_pkt.valid = 1; rx_pkt.core_id = 6'd2; rx_pkt.neuron_id = 16'($urandom); rx_pkt.delay = 4'($urandom);
        case ($urandom_range(0, 2)) 0: rx_pkt.spike = 1; 1: rx_pkt.wr = 1; default: rx_pkt.rd = 1; endcase
        sent++;
      end
    end
    if (!axon_pkt.valid || acc_ax) begin
      axon_pkt = '0;
      if ($urandom_range(0, 9) == 0) begin axon_pkt.valid = 1; axon_pkt.spike = 1; axon_pkt.core_id = 6'd5; end
    end
    core_idle = $urandom_range(0, 3) != 0;
    start_tstep = $urandom_range(0, 19) == 0;
    tx_ready = $urandom_range(0, 2) != 0;
    test_en = (cycles > 3000 && cycles < 3100);
  end
  always @(posedge clk) if (rst_n) begin
    acc_rx = rx_pkt.valid && rx_ready; acc_ax = axon_pkt.valid && axon_ready;
    cycles++;
    #1;
    chk(gclk == en_exp, "gated clock follows its enable");
    if (!gclk) off++;
  end
  always @(posedge clk) if (rst_n) begin
    if (spk_valid) nspk++;
    if (cfg.we) begin chk(core_idle, "configuration write only when idle"); nwr++; end
    if (tx_pkt.valid && tx_ready) begin
      if (tx_pkt.rd) begin chk(tx_pkt.init && tx_pkt.core_id == 6'd2, "response fields"); nresp++; end
      else begin chk(tx_pkt.spike && tx_pkt.core_id == 6'd5, "axon packet fields"); nout++; end
    end
  end
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    repeat (5000) @(posedge clk);
    #2;
    chk(int'(gated_cycles) == off && off > 100, $sformatf("gated cycles %0d vs %0d", gated_cycles, off));
    chk(nspk > 50 && nwr > 50 && nresp > 50 && nout > 50, "all packet kinds handled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
