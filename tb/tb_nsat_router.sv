// tb_nsat_router -- testbench of the five-port tile router.
//
// All five inputs offer random packets (spikes and writes for the four
// cores, read responses, packets for another tile) while the outputs are
// randomly not ready.  A scoreboard keeps, per input and output, the
// packets still expected in order.  Checks: every packet leaves through
// its routed port (responses and foreign packets to port 0, core packets
// to port 1 + CoreID[1:0]), in order per source, none is lost or
// duplicated, foreign packets from port 0 are dropped and counted, and
// every input gets a share of a contended output (round-robin).
`timescale 1ns/1ps
module tb_nsat_router;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  aer_pkt_t in_pkt [5]; logic in_ready [5]; aer_pkt_t out_pkt [5]; logic out_ready [5];
  logic [31:0] n_routed, n_dropped;
  nsat_router #(.TILE_ID(4'd0)) dut (.clk, .rst_n, .in_pkt, .in_ready, .out_pkt, .out_ready, .n_routed, .n_dropped);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #5_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [31:0] exp_q [5][5][$];
  int sent = 0, recv = 0, drops = 0, per_src [5][5];
  bit stop = 0;
  function automatic int route(aer_pkt_t p);
    if (p.rd && p.init) return 0;
    if (p.core_id[5:2] == 4'd0) return 1 + int'(p.core_id[1:0]);
    return 0;
  endfunction
  function automatic aer_pkt_t rnd_pkt(int src, int seq);
    aer_pkt_t p = '0;
    p.valid = 1;
    case ($urandom_range(0, 5))
      0: begin p.rd = 1; p.init = 1; end
      1: p.wr = 1;
      default: p.spike = 1;
    endcase
    p.core_id = ($urandom_range(0, 7) == 0) ? 6'(16 + $urandom_range(0, 15)) : 6'($urandom_range(0, 3));
    p.delay = 4'(src); p.neuron_id = 16'(seq);
    return p;
  endfunction
  // drive on the negative edge, accept on the positive edge
  int seq [5];
  int o, s;
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < 5; i++) begin
      if (!in_pkt[i].valid || in_ready[i]) begin
        in_pkt[i] = (!stop && $urandom_range(0, 2) != 0) ? rnd_pkt(i, seq[i]) : '0;
        seq[i]++;
      end
      out_ready[i] = ($urandom_range(0, 3) != 0) || stop;
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 5; i++) begin
      if (in_pkt[i].valid && in_ready[i]) begin
        o = route(in_pkt[i]);
        if (i == 0 && o == 0) drops++;
        else begin exp_q[i][o].push_back(32'(in_pkt[i])); sent++; end
      end
      if (out_pkt[i].valid && out_ready[i]) begin
        s = int'(out_pkt[i].delay);
        recv++; per_src[i][s]++;
        chk(exp_q[s][i].size() != 0 && exp_q[s][i][0] == 32'(out_pkt[i]),
            $sformatf("port %0d packet from %0d in order", i, s));
        if (exp_q[s][i].size() != 0) void'(exp_q[s][i].pop_front());
      end
    end
  end
  initial begin
    for (int i = 0; i < 5; i++) begin in_pkt[i] = '0; out_ready[i] = 0; end
    #1 rst_n = 0; #20 rst_n = 1;
    repeat (4000) @(posedge clk);
    stop = 1;
    repeat (100) @(posedge clk);
    chk(recv == sent && sent > 3000, $sformatf("all %0d packets delivered (%0d)", sent, recv));
    chk(int'(n_dropped) == drops && drops > 0, "foreign packets from the host port dropped");
    for (int s = 1; s < 5; s++) chk(per_src[0][s] > 20, "round-robin share of port 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
