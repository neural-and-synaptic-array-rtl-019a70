// tb_nsat_neuron_lane -- testbench of one neuron evaluation lane.
//
// Applies 20000 random input sets to the three combinational steps of the
// lane (integrate, synaptic input, spike/reset) and compares them with a
// reference model written from the NSAT equations: the shift operator
// d(a, x) = x << a for a >= 0 and sign(x)(|x| >> -a) otherwise, the A-matrix
// operator that gives -sign(y) for a = 0, 16-bit saturation, clipping to
// [x_low, x_up], reset or spike increment.  Directed cases check
// saturation at both limits and the a = 0 rule.
`timescale 1ns/1ps
module tb_nsat_neuron_lane;
  import nsat_pkg::*;
  int checks = 0, failures = 0;
  state_t [N_COMP-1:0] x_row; acoef_t [N_COMP-1:0] a_row; logic [N_COMP-1:0] lane_mask;
  state_t x_self, bias, gauss, x1, x1_in, x_low, x_up, x2, x2_in, x_reset, x_incr, x3;
  logic sigma_en, spike, reset_on; shamt_t sigma, w_gain;
  logic signed [ACC_W-1:0] acc;
  nsat_neuron_lane dut (.*);
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #10_000_000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic longint d(int a, longint x);
    longint m;
    if (a >= 0) return x * (longint'(1) << a);
    m = (x < 0) ? -x : x;
    m = m >> (-a);
    return (x < 0) ? -m : m;
  endfunction
  function automatic longint dd(int a, longint x);
    longint y = d(a, x);
    if (a == 0) return (y > 0) ? -1 : (y < 0) ? 1 : 0;
    return y;
  endfunction
  function automatic longint sat(longint v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : v;
  endfunction

  longint e1, e2, e3, s;
  int n_sat = 0;
  initial begin
    for (int it = 0; it < 20000; it++) begin
      for (int j = 0; j < N_COMP; j++) begin
        x_row[j] = state_t'($urandom);
        a_row[j].en = $urandom_range(0, 1); a_row[j].neg = $urandom_range(0, 1);
        a_row[j].sh = shamt_t'($urandom_range(0, 31));
      end
      lane_mask = 8'($urandom);
      x_self = (it % 50 == 0) ? state_t'(16'sh7ff0) : state_t'($urandom);
      bias = state_t'($urandom_range(0, 2000) - 1000);
      sigma_en = $urandom_range(0, 1); sigma = shamt_t'($urandom_range(0, 31)); gauss = state_t'($urandom);
      #1;
      s = longint'(x_self) + longint'(bias);
      for (int j = 0; j < N_COMP; j++)
        if (lane_mask[j] && a_row[j].en)
          s = a_row[j].neg ? s - dd(int'(a_row[j].sh), longint'(x_row[j])) : s + dd(int'(a_row[j].sh), longint'(x_row[j]));
      if (sigma_en) s = s + d(int'(sigma), longint'(gauss));
      e1 = sat(s);
      if (e1 != s) n_sat++;
      chk(longint'(x1) == e1, $sformatf("x1 %0d vs %0d", x1, e1));
      x1_in = state_t'($urandom); acc = 16'($urandom); w_gain = shamt_t'($urandom_range(0, 31));
      x_low = state_t'(-$urandom_range(0, 32768)); x_up = state_t'($urandom_range(0, 32767));
      #1;
      s = longint'(x1_in) + d(int'(w_gain), longint'(acc));
      e2 = (s > longint'(x_up)) ? longint'(x_up) : (s < longint'(x_low)) ? longint'(x_low) : s;
      chk(longint'(x2) == e2, $sformatf("x2 %0d vs %0d", x2, e2));
      x2_in = state_t'($urandom); spike = $urandom_range(0, 1); reset_on = $urandom_range(0, 1);
      x_reset = state_t'($urandom); x_incr = state_t'($urandom);
      #1;
      e3 = !spike ? longint'(x2_in) : reset_on ? longint'(x_reset) : sat(longint'(x2_in) + longint'(x_incr));
      chk(longint'(x3) == e3, $sformatf("x3 %0d vs %0d", x3, e3));
    end
    // a = 0 rule: x1 = x - sign(x_j) for a positive neighbour
    for (int j = 0; j < N_COMP; j++) begin a_row[j] = '0; x_row[j] = '0; end
    lane_mask = 8'h03; a_row[1] = '{en: 1'b1, neg: 1'b0, sh: shamt_t'(0)}; x_row[1] = 16'sd500;
    x_self = 16'sd10; bias = 0; sigma_en = 0; #1;
    chk(x1 == 16'sd9, "a = 0 gives -sign(x_j)");
    chk(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
