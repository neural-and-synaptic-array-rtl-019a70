// tb_nsat_weight_accum -- testbench of the ping-pong weight accumulation.
//
// With 256 slots and a reference model of both banks, it runs 30 steps:
// in each step random weights (some dropped) are accumulated into the
// write bank while the rows of the read bank are read (data one cycle
// after rd_en, the row is cleared on read), then swap exchanges the
// banks.  Checks the read data of every row against the model (sums from
// the step before), saturation at the 16-bit limits, that dropped weights
// are not added, and that a read row is zero on the next read.
`timescale 1ns/1ps
module tb_nsat_weight_accum;
  import nsat_pkg::*;
  localparam int SL = 256, RW = SL / N_COMP;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, swap = 0, acc_en = 0, acc_drop = 0, rd_en = 0;
  logic [7:0] acc_slot = 0; weight_t acc_w = 0; logic [4:0] rd_row = 0;
  logic signed [N_COMP-1:0][ACC_W-1:0] rd_data;
  logic wr_bank;
  nsat_weight_accum #(.SLOTS(SL)) dut (.clk, .rst_n, .swap, .acc_en, .acc_drop, .acc_slot, .acc_w,
    .rd_en, .rd_row, .rd_data, .wr_bank);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #5_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int m [2][SL];
  int wb = 0, n_sat = 0, n_drop = 0, nv;
  function automatic int sat(int v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : v;
  endfunction
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      // accumulate (the hot slot 5 saturates)
      for (int i = 0; i < 700; i++) begin
        @(negedge clk);
        acc_en = 1; acc_drop = ($urandom_range(0, 4) == 0);
        acc_slot = (i < 350) ? 8'd5 : 8'($urandom);
        acc_w = (t % 2) ? weight_t'(8'sd127) : weight_t'(8'($urandom));
        if (acc_slot == 5) acc_w = (t % 4 < 2) ? weight_t'(8'sd127) : weight_t'(-8'sd128);
        if (!acc_drop) begin
          nv = sat(m[wb][acc_slot] + int'(acc_w));
          if (nv != m[wb][acc_slot] + int'(acc_w)) n_sat++;
          m[wb][acc_slot] = nv;
        end else n_drop++;
      end
      @(negedge clk); acc_en = 0;
      // read every row of the other bank
      for (int r = 0; r < RW; r++) begin
        @(negedge clk); rd_en = 1; rd_row = 5'(r);
        @(negedge clk); rd_en = 0;
        for (int l = 0; l < N_COMP; l++) begin
          chk(int'($signed(rd_data[l])) == m[1-wb][r*N_COMP+l],
              $sformatf("step %0d slot %0d: %0d vs %0d", t, r*N_COMP+l, $signed(rd_data[l]), m[1-wb][r*N_COMP+l]));
          m[1-wb][r*N_COMP+l] = 0;
        end
      end
      // second read returns zero
      @(negedge clk); rd_en = 1; rd_row = 0;
      @(negedge clk); rd_en = 0;
      chk(rd_data == '0, "row cleared on read");
      @(negedge clk); swap = 1; @(negedge clk); swap = 0;
      wb = 1 - wb;
      chk(int'(wr_bank) == wb, "swap exchanges the banks");
    end
    chk(n_sat > 0 && n_drop > 0, "saturation and drops exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
