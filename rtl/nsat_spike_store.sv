// nsat_spike_store -- delay array of the NSAT core control unit.
//
// A bitmap of DSLOTS time steps x N_AXON axons holds every spike that
// still has to be delivered to the synaptic weight memory: a spike with
// axonal delay d arriving during step t sets bit (t+d mod DSLOTS, axon) and
// is processed during step t+d, so its weights reach the neurons at step
// t+d+1.  Delay 0 spikes land in the current slot, so the bitmap is also
// the input queue of the weight look-up: it cannot overflow, and repeated
// spikes of one axon in one step merge into one.
//
// Interface: two set ports (routed-back spikes of the own neurons, spikes
// from the de-packetizer) can write in the same cycle.  pend_valid /
// pend_axon give the lowest pending axon of the current slot, pop clears
// it.  tick (start of a time step) advances the current slot; a set in the
// tick cycle already counts from the new slot.  The array size (neuron
// space x largest delay) follows the paper; holding delay-0 spikes in the
// same bitmap is this design's choice.
module nsat_spike_store
  import nsat_pkg::*;
#(
  parameter int N_AXON = 4096,
  parameter int DSLOTS = 2**DELAY_W
)(
  input  logic clk,
  input  logic rst_n,
  input  logic tick,
  input  logic set0,
  input  logic [$clog2(N_AXON)-1:0] set0_axon,
  input  logic [DELAY_W-1:0]        set0_delay,
  input  logic set1,
  input  logic [$clog2(N_AXON)-1:0] set1_axon,
  input  logic [DELAY_W-1:0]        set1_delay,
  output logic pend_valid,
  output logic [$clog2(N_AXON)-1:0] pend_axon,
  input  logic pop,
  output logic [$clog2(DSLOTS)-1:0] cur_slot
);

  localparam int DS_W = $clog2(DSLOTS);
  logic [N_AXON-1:0] slots [DSLOTS];
  logic [DS_W-1:0]   base;

  assign base = tick ? DS_W'(cur_slot + 1'b1) : cur_slot;

  nsat_bitmap_ffs #(.N(N_AXON)) u_ffs (.bits(slots[cur_slot]), .found(pend_valid), .index(pend_axon));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_slot <= '0;
      for (int s = 0; s < DSLOTS; s++) slots[s] <= '0;
    end else begin
      if (tick) cur_slot <= base;
      if (pop) slots[cur_slot][pend_axon] <= 1'b0;
      if (set0) slots[DS_W'(base + DS_W'(set0_delay))][set0_axon] <= 1'b1;
      if (set1) slots[DS_W'(base + DS_W'(set1_delay))][set1_axon] <= 1'b1;
    end
  end

  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) pop |-> pend_valid);

endmodule
