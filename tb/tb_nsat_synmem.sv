// tb_nsat_synmem -- testbench of the synaptic weight memory.
//
// Uses 64 axons and 4096 weight words (8 banks).  Random sparse fanouts
// are run-length encoded into the weight array and the pointer array
// through the configuration bus (two axons share one pointer target, one
// has no synapses).  Every axon is then requested; the testbench checks
// the stream of (destination, weight, word address) against the encoded
// connections, that the weights come one per cycle without gaps starting
// two cycles after the request, that fo_last marks the final one, and
// that write-backs issued during the walk replace the weight byte and keep
// the skip byte (checked by configuration read-back).
`timescale 1ns/1ps
module tb_nsat_synmem;
  import nsat_pkg::*;
  localparam int NA = 64, NW = 4096;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  cfg_bus_t cfg = '0; logic [15:0] rdata;
  logic req_valid = 0; logic [5:0] req_axon = 0; logic ready;
  logic fo_valid, fo_last; logic [11:0] fo_dest; weight_t fo_weight; logic [11:0] fo_waddr;
  logic wb_en = 0; logic [11:0] wb_addr = 0; weight_t wb_weight = 0;
  nsat_synmem #(.N_AXON(NA), .WMEM_WORDS(NW)) dut (.clk, .rst_n, .cfg, .cfg_rdata(rdata),
    .req_valid, .req_axon, .ready, .fo_valid, .fo_dest, .fo_weight, .fo_waddr, .fo_last,
    .wb_en, .wb_addr, .wb_weight);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #20_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic wr(cfg_sel_e sel, int a, int d);
    @(negedge clk); cfg = '0; cfg.we = 1; cfg.sel = sel; cfg.addr = 16'(a); cfg.wdata = 16'(d);
    @(negedge clk); cfg = '0;
  endtask

  int nsyn [NA], paddr [NA], base [NA];
  int dst [NA][64]; int wt [NA][64];
  int waddr = 0, words = 0, skip, dprev, n, got, t0, tfirst, wbs = 0;
  int newv [NW], skp [NW]; bit wbd [NW];
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    for (int a = 0; a < NA; a++) begin
      if (a == 9) begin nsyn[a] = nsyn[8]; paddr[a] = paddr[8]; base[a] = base[8];
        for (int k = 0; k < nsyn[a]; k++) begin dst[a][k] = dst[8][k]; wt[a][k] = wt[8][k]; end
      end else begin
        nsyn[a] = (a == 3) ? 0 : $urandom_range(1, 60);
        paddr[a] = waddr; base[a] = $urandom_range(0, 2000);
        dprev = base[a];
        for (int k = 0; k < nsyn[a]; k++) begin
          skip = $urandom_range(0, 20);
          dst[a][k] = (k == 0) ? base[a] + skip : dprev + 1 + skip;
          dprev = dst[a][k];
          wt[a][k] = int'($signed(8'($urandom)));
          skp[waddr + k] = skip;
          wr(SEL_WDATA, waddr + k, (skip << 8) | (wt[a][k] & 255));
        end
        waddr += nsyn[a];
      end
      wr(SEL_PTR, a*4 + 0, paddr[a]); wr(SEL_PTR, a*4 + 1, nsyn[a]); wr(SEL_PTR, a*4 + 2, base[a]);
    end
    cfg.sel = SEL_PTR; cfg.addr = 16'(9*4+1); #1 chk(int'(rdata) == nsyn[9], "pointer read-back");
    cfg = '0;
    for (int a = 0; a < NA; a++) begin
      @(negedge clk); chk(ready, "ready when idle");
      req_valid = 1; req_axon = 6'(a); t0 = $time;
      @(negedge clk); req_valid = 0;
      got = 0; tfirst = -1;
      while (!ready || got == 0) begin
        if (fo_valid) begin
          if (tfirst < 0) begin tfirst = int'($time); chk(tfirst - t0 == 20, "first weight two cycles after request"); end
          chk(int'($time) - tfirst == got * 10, "one weight per cycle");
          chk(got < nsyn[a] && int'(fo_dest) == dst[a][got] && int'(fo_weight) == wt[a][got] &&
              int'(fo_waddr) == paddr[a] + got, $sformatf("axon %0d synapse %0d", a, got));
          chk(fo_last == (got == nsyn[a] - 1), "fo_last");
          wb_en = (a != 9) && $urandom_range(0, 1); wb_addr = fo_waddr; wb_weight = weight_t'($urandom);
          if (wb_en) begin newv[fo_waddr] = int'(wb_weight); wbd[fo_waddr] = 1; wbs++; end
          got++;
        end
        @(negedge clk); wb_en = 0;
        if (nsyn[a] == 0 && ready) break;
      end
      chk(got == nsyn[a], $sformatf("axon %0d count %0d vs %0d", a, got, nsyn[a]));
    end
    for (int w = 0; w < waddr; w++) if (wbd[w]) begin
      cfg.sel = SEL_WDATA; cfg.addr = 16'(w); #1;
      chk(rdata[7:0] == 8'(newv[w]) && int'(rdata[15:8]) == skp[w], "write-back keeps skip byte");
    end
    cfg = '0;
    chk(wbs > 0, "write-backs exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
