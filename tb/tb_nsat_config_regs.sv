// tb_nsat_config_regs -- testbench of the global configuration registers.
//
// Checks the reset values, then writes random values to every register
// through the configuration bus and checks both the register outputs
// (valid the cycle after the write) and the read-back data, that writes
// to another memory select leave the registers alone, and that reads of
// another select return zero.
`timescale 1ns/1ps
module tb_nsat_config_regs;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  cfg_bus_t cfg = '0;
  logic [15:0] rdata;
  logic [1:0] log2k; logic learn_en; logic [CNT_W-1:0] tstdp; logic [3:0] rr_bits;
  nsat_config_regs dut (.clk, .rst_n, .cfg, .cfg_rdata(rdata), .log2k, .learn_en, .tstdp, .rr_bits);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #1_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic wr(cfg_sel_e sel, int a, int d);
    @(negedge clk); cfg = '0; cfg.we = 1; cfg.sel = sel; cfg.addr = 16'(a); cfg.wdata = 16'(d);
    @(negedge clk); cfg = '0;
  endtask
  int e_k, e_l, e_t, e_r, a, d;
  cfg_sel_e s;
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    chk(log2k == 3 && !learn_en && tstdp == 64 && rr_bits == 0, "reset values");
    e_k = 3; e_l = 0; e_t = 64; e_r = 0;
    for (int i = 0; i < 200; i++) begin
      a = $urandom_range(0, 4); d = $urandom;
      s = ($urandom_range(0, 4) == 0) ? SEL_NPAR : SEL_GCFG;
      wr(s, a, d);
      if (s == SEL_GCFG)
        case (a)
          0: e_k = d & 3; 1: e_l = d & 1; 2: e_t = d & 255; 3: e_r = d & 15; default: ;
        endcase
      chk(int'(log2k) == e_k && int'(learn_en) == e_l && int'(tstdp) == e_t && int'(rr_bits) == e_r,
          "register outputs after write");
      cfg.sel = SEL_GCFG;
      for (int r = 0; r < 4; r++) begin
        cfg.addr = 16'(r); #1;
        chk(int'(rdata) == ((r == 0) ? e_k : (r == 1) ? e_l : (r == 2) ? e_t : e_r), "read-back");
      end
      cfg.sel = SEL_STATE; #1;
      chk(rdata == 0, "other select reads zero");
      cfg = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
