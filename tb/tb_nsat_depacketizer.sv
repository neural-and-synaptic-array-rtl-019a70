// tb_nsat_depacketizer -- testbench of the incoming packet decoder.
//
// Sends random mixes of spike, address (write with Init), data write and
// read packets while cfg_ready (core idle) and resp_ready toggle at
// random.  A model tracks the configuration address register.  Checks
// that spikes appear on spk_* with their axon and delay even while the
// core is busy, that every data word is written once to (select, address)
// with the address advancing after each word, that no write or read
// happens while cfg_ready is low, that every read returns a response with
// Rd and Init set, this core's CoreID, the select and the read data.
`timescale 1ns/1ps
module tb_nsat_depacketizer;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  aer_pkt_t in_pkt = '0, resp_pkt; logic in_ready, spk_valid, cfg_ready = 0, resp_ready = 0, fifo_busy;
  logic [15:0] spk_axon, cfg_rdata; logic [3:0] spk_delay; cfg_bus_t cfg;
  nsat_depacketizer #(.CORE_ID(6'd9)) dut (.*);
  always #5 clk = ~clk;
  assign cfg_rdata = cfg.addr ^ 16'h5a5a;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #5_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  aer_pkt_t q [$];
  int m_sel = 0, m_addr = 0, ns = 0, nw = 0, nr = 0, busy_spk = 0;
  bit acc = 0;
  aer_pkt_t p;
  always @(negedge clk) if (rst_n) begin
    if (!in_pkt.valid || acc) in_pkt = (q.size() != 0 && $urandom_range(0, 1)) ? q.pop_front() : '0;
    cfg_ready  = $urandom_range(0, 2) != 0;
    resp_ready = $urandom_range(0, 3) != 0;
  end
  // expected effects in order
  aer_pkt_t e [$];
  always @(posedge clk) if (rst_n) begin
    acc = in_pkt.valid && in_ready;
    if (acc) e.push_back(in_pkt);
    if (spk_valid) begin
      chk(e.size() != 0 && e[0].spike && spk_axon == e[0].neuron_id && spk_delay == e[0].delay, "spike decoded");
      if (!cfg_ready) busy_spk++;
      void'(e.pop_front()); ns++;
    end
    if (cfg.we) begin
      chk(cfg_ready, "write only when the core is idle");
      chk(e.size() != 0 && e[0].wr && !e[0].init && int'(cfg.sel) == m_sel && int'(cfg.addr) == m_addr &&
          cfg.wdata == e[0].neuron_id, "data write at the current address");
      m_addr = (m_addr + 1) & 16'hffff; void'(e.pop_front()); nw++;
    end
    if (resp_pkt.valid && resp_ready) begin
      chk(cfg_ready && cfg.re, "read only when the core is idle");
      chk(e.size() != 0 && e[0].rd && resp_pkt.rd && resp_pkt.init && resp_pkt.core_id == 6'd9 &&
          resp_pkt.delay == e[0].delay && resp_pkt.neuron_id == (e[0].neuron_id ^ 16'h5a5a), "read response");
      void'(e.pop_front()); nr++;
    end
    // address packets take effect silently
    while (e.size() != 0 && e[0].wr && e[0].init && !spk_valid && !cfg.we && !(resp_pkt.valid && resp_ready)) begin
      m_sel = int'(e[0].delay); m_addr = int'(e[0].neuron_id); void'(e.pop_front());
    end
  end
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      p = '0;
      p.valid = 1; p.core_id = 6'd9; p.delay = 4'($urandom); p.neuron_id = 16'($urandom);
      case ($urandom_range(0, 5))
        0: begin p.wr = 1; p.init = 1; end
        1, 2: p.wr = 1;
        3: p.rd = 1;
        default: p.spike = 1;
      endcase
      q.push_back(p);
    end
    while ((q.size() != 0 || e.size() != 0 || in_pkt.valid) && $time < 4_000_000) @(posedge clk);
    chk(q.size() == 0 && e.size() == 0, "all packets handled");
    chk(ns > 100 && nw > 100 && nr > 100, $sformatf("spikes %0d writes %0d reads %0d", ns, nw, nr));
    chk(busy_spk > 0, "spikes pass while the core is busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
