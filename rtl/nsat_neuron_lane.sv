// nsat_neuron_lane -- arithmetic of one state component of an NSAT neuron.
//
// The neuron evaluation pipeline holds one of these per component of a row
// (eight), so all components of a neuron are updated in the same cycle.
// The lane is combinational and is split into the three arithmetic steps of
// the discrete NSAT equations, each fed from a different pipeline stage:
//
//   integrate : x1 = sat( x_i + sum_j (+-)(A_ij dd x_j) + b + (sigma d eta) )
//               only lanes j of the same neuron (lane_mask) and enabled
//               A entries contribute; "dd" is the zero-rounding shift.
//   synapse   : x2 = clip( sat(x1 + (w_gain d acc)), x_low, x_up )
//   spike     : x3 = reset_on ? x_reset : sat(x2 + x_incr)   when spiking
//
// Following the paper, the dynamics are integrated before the synaptic
// input is added, and products are shifts.  Where the weight gain is applied
// (on the accumulated sum rather than on each weight) and the saturation to
// 16 bits after every step are choices of this design.
module nsat_neuron_lane
  import nsat_pkg::*;
(
  // integrate step
  input  state_t [N_COMP-1:0] x_row,      // all components of the row
  input  acoef_t [N_COMP-1:0] a_row,      // A_ij for this lane i
  input  logic   [N_COMP-1:0] lane_mask,  // lanes of the same neuron
  input  state_t              x_self,     // x_i
  input  state_t              bias,
  input  logic                sigma_en,
  input  shamt_t              sigma,
  input  state_t              gauss,      // zero-mean normal sample
  output state_t              x1,
  // synapse step
  input  state_t              x1_in,
  input  logic signed [ACC_W-1:0] acc,
  input  shamt_t              w_gain,
  input  state_t              x_low,
  input  state_t              x_up,
  output state_t              x2,
  // spike step
  input  state_t              x2_in,
  input  logic                spike,
  input  logic                reset_on,
  input  state_t              x_reset,
  input  state_t              x_incr,
  output state_t              x3
);

  logic signed [39:0] sum1, syn, s2;

  always_comb begin
    sum1 = 40'(x_self) + 40'(bias);
    for (int j = 0; j < N_COMP; j++) begin
      if (lane_mask[j] && a_row[j].en) begin
        if (a_row[j].neg) sum1 = sum1 - ddshift(a_row[j].sh, 24'(x_row[j]));
        else              sum1 = sum1 + ddshift(a_row[j].sh, 24'(x_row[j]));
      end
    end
    if (sigma_en) sum1 = sum1 + dshift(sigma, 24'(gauss));
    x1 = sat_state(sum1);
  end

  always_comb begin
    syn = dshift(w_gain, 24'(acc));
    s2  = 40'(x1_in) + syn;
    if (s2 > 40'(x_up))       x2 = x_up;
    else if (s2 < 40'(x_low)) x2 = x_low;
    else                      x2 = sat_state(s2);
  end

  always_comb begin
    if (spike) x3 = reset_on ? x_reset : sat_state(40'(x2_in) + 40'(x_incr));
    else       x3 = x2_in;
  end

endmodule
