// tb_nsat_rng -- testbench of the random number generator.
//
// Draws 20000 samples and checks that the uniform output covers its range
// evenly (mean of the top byte near 127.5, each half of the range near
// 50 %, every top-byte value seen), that the normal output has mean near
// zero and a spread in the expected range, that it is bell shaped (more
// samples within one sigma than beyond), that en = 0 freezes both outputs
// and that two seeds give different streams.
`timescale 1ns/1ps
module tb_nsat_rng;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] u, u2;
  state_t g, g2;
  nsat_rng #(.SEED(32'h1234_5678)) dut (.clk, .rst_n, .en, .uniform(u), .gauss(g));
  nsat_rng #(.SEED(32'h0bad_cafe)) dut2 (.clk, .rst_n, .en, .uniform(u2), .gauss(g2));
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin #10_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  localparam int N = 20000;
  real su, sg, sg2, mean, var_g, sd;
  int hi, same, in1, out2;
  bit seen [256];
  logic [15:0] uf; state_t gf;
  real gs [N];
  initial begin
    repeat (3) @(posedge clk); rst_n = 1; en = 1;
    repeat (4) @(posedge clk);
    su = 0; sg = 0; sg2 = 0; hi = 0; same = 0;
    for (int i = 0; i < N; i++) begin
      @(posedge clk); #1;
      su += real'(u[15:8]);
      if (u[15]) hi++;
      seen[u[15:8]] = 1;
      gs[i] = real'(g);
      sg += real'(g); sg2 += real'(g) * real'(g);
      if (u == u2) same++;
    end
    mean = su / N;
    chk(mean > 124.0 && mean < 131.0, $sformatf("uniform mean %f", mean));
    chk(hi > N * 45 / 100 && hi < N * 55 / 100, $sformatf("upper half %0d", hi));
    for (int b = 0; b < 256; b++) chk(seen[b], $sformatf("value %0d seen", b));
    mean = sg / N; var_g = sg2 / N - mean * mean; sd = $sqrt(var_g);
    $display("gauss mean %f sd %f", mean, sd);
    chk(mean > -300.0 && mean < 300.0, "gauss mean near zero");
    chk(sd > 4000.0 && sd < 12000.0, "gauss spread (4 uniforms of 16 bits, /4)");
    in1 = 0; out2 = 0;
    for (int i = 0; i < N; i++) begin
      if (gs[i] > -sd && gs[i] < sd) in1++;
      if (gs[i] < -2*sd || gs[i] > 2*sd) out2++;
    end
    chk(in1 > N * 60 / 100, $sformatf("within one sigma %0d", in1));
    chk(out2 < N * 8 / 100, $sformatf("beyond two sigma %0d", out2));
    chk(same < 10, "seeds give different streams");
    en = 0; @(posedge clk); #1; uf = u; gf = g;
    repeat (5) @(posedge clk); #1;
    chk(u == uf && g == gf, "en = 0 holds the outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
