// tb_nsat_aer_if -- testbench of the AER host interface.
//
// A bridge model offers 2000 random words (rxf_n low while it has data,
// a word leaves on every clock with rd_n and rxf_n low) and accepts words
// while txe_n is low, both with random gaps; the router side takes
// packets with random ready and returns random packets.  Checks that
// every word arrives in order as a packet with Valid set and the same
// 32 data bits, that every returned packet leaves as its 32 data bits in
// order, that oe_n follows rd_n, that nothing is written while txe_n is
// high, and the word counters.
`timescale 1ns/1ps
module tb_nsat_aer_if;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, rxf_n = 1, txe_n = 1;
  logic [31:0] data_in = 0, data_out; logic oe_n, rd_n, wr_n;
  aer_pkt_t to_router, from_router = '0; logic to_router_ready = 0, from_router_ready;
  logic [31:0] n_rx, n_tx;
  nsat_aer_if dut (.*);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #5_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  localparam int N = 2000;
  logic [31:0] src [N], ret [N];
  int ip = 0, op = 0, rp = 0, tp = 0, bad_wr = 0, bad_oe = 0;
  bit gap;
  always @(negedge clk) if (rst_n) begin
    gap = ($urandom_range(0, 4) == 0);
    rxf_n = !(ip < N) || gap; data_in = (ip < N) ? src[ip] : '0;
    txe_n = ($urandom_range(0, 3) == 0);
    to_router_ready = ($urandom_range(0, 3) != 0);
    if (!from_router.valid || from_router_ready)
      from_router = (rp < N && $urandom_range(0, 1)) ? aer_pkt_t'({1'b1, ret[rp]}) : '0;
  end
  always @(posedge clk) if (rst_n) begin
    if (oe_n != rd_n) bad_oe++;
    if (!rd_n && !rxf_n) ip++;
    if (to_router.valid && to_router_ready) begin
      chk(to_router[31:0] == src[op], "host word arrives in order");
      op++;
    end
    if (from_router.valid && from_router_ready) rp++;
    if (!wr_n) begin
      if (txe_n) bad_wr++;
      chk(data_out == ret[tp], "returned packet leaves in order");
      tp++;
    end
  end
  initial begin
    for (int i = 0; i < N; i++) begin src[i] = $urandom; ret[i] = $urandom; end
    #1 rst_n = 0; #20 rst_n = 1;
    while ((op < N || tp < N) && $time < 4_000_000) @(posedge clk);
    chk(op == N && tp == N, $sformatf("all words through (%0d, %0d)", op, tp));
    chk(int'(n_rx) == N && int'(n_tx) == N, "word counters");
    chk(bad_wr == 0, "no write while the bridge is full");
    chk(bad_oe == 0, "oe_n follows rd_n");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
