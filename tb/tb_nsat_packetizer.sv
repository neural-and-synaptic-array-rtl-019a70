// tb_nsat_packetizer -- testbench of the outgoing packet merger.
//
// Offers random spike packets and read responses (held until accepted)
// against a randomly ready output.  Checks that every packet comes out
// once, each source in its own order, that a response offered together
// with a spike is taken first (priority), and that the output strobe is
// the packet's Valid bit.
`timescale 1ns/1ps
module tb_nsat_packetizer;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  aer_pkt_t spk_pkt = '0, resp_pkt = '0, out_pkt; logic spk_ready, resp_ready, out_ready = 0;
  nsat_packetizer dut (.*);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #5_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int ns = 0, nr = 0, es = 0, er = 0, prio = 0, prio_bad = 0;
  always @(negedge clk) if (rst_n) begin
    if (!spk_pkt.valid || s_acc) begin
      spk_pkt = '0;
      if (ns < 1000 && $urandom_range(0, 1)) begin spk_pkt.valid = 1; spk_pkt.spike = 1; spk_pkt.neuron_id = 16'(ns); ns++; end
    end
    if (!resp_pkt.valid || r_acc) begin
      resp_pkt = '0;
      if (nr < 1000 && $urandom_range(0, 2) == 0) begin resp_pkt.valid = 1; resp_pkt.rd = 1; resp_pkt.init = 1; resp_pkt.neuron_id = 16'(nr); nr++; end
    end
    out_ready = $urandom_range(0, 2) != 0;
  end
  bit s_acc = 0, r_acc = 0;
  always @(posedge clk) if (rst_n) begin
    s_acc = spk_pkt.valid && spk_ready; r_acc = resp_pkt.valid && resp_ready;
    if (spk_pkt.valid && resp_pkt.valid) begin
      prio++;
      if (spk_ready) prio_bad++;
    end
    if (out_pkt.valid && out_ready) begin
      if (out_pkt.spike) begin chk(int'(out_pkt.neuron_id) == es, "spike order"); es++; end
      else begin chk(out_pkt.rd && int'(out_pkt.neuron_id) == er, "response order"); er++; end
    end
  end
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    while ((es < 1000 || er < 1000) && $time < 4_000_000) @(posedge clk);
    chk(es == 1000 && er == 1000, "all packets out");
    chk(prio > 0 && prio_bad == 0, "response has priority");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
