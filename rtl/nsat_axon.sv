// nsat_axon -- axon module of an NSAT core.
//
// Holds the routing information of every neuron mapped to the core and
// sends each spike of the neuron evaluation either back into the core or
// out towards the router.  A routing entry is two words:
//   word 0: [15] enable, [14] route back, [11:8] delay, [5:0] core id
//   word 1: destination axon (index into the destination's pointer array)
// Spikes of the evaluation pipeline (up to N_COMP per cycle) are first set
// in a bitmap of spiking neurons, so the pipeline never stalls; the
// bitmap is then drained one neuron per cycle, lowest index first.  A
// routed-back spike is written into the core's delay array (back_*); an
// outgoing spike becomes a spike packet for the packetizer and waits for
// pkt_ready.  Neurons without an enabled entry are dropped.
//
// The per-neuron table and the route-back/route-out flag follow the
// paper; the entry format and the bitmap in front are this design's.
module nsat_axon
  import nsat_pkg::*;
#(
  parameter int ROWS   = N_SLOTS / N_COMP,
  parameter int N_AXON = 4096
)(
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_bus_t    cfg,
  output logic [15:0] cfg_rdata,
  input  logic [1:0]  log2k,
  // spikes from the neuron evaluation
  input  logic        spk_valid,
  input  logic [$clog2(ROWS)-1:0] spk_row,
  input  logic [N_COMP-1:0] spk_mask,
  // spikes routed back into this core
  output logic        back_valid,
  output logic [$clog2(N_AXON)-1:0] back_axon,
  output logic [DELAY_W-1:0] back_delay,
  // spikes to other cores
  output aer_pkt_t    pkt,
  input  logic        pkt_ready,
  output logic        busy,
  output logic [31:0] n_out,
  output logic [31:0] n_back
);

  localparam int SLOTS = ROWS * N_COMP;
  localparam int SA_W  = $clog2(SLOTS);

  logic [15:0]      route0 [SLOTS];
  logic [15:0]      route1 [SLOTS];
  logic [SLOTS-1:0] fired;
  logic             f_found;
  logic [SA_W-1:0]  f_idx;
  logic [15:0]      r0, r1;
  logic             take;

  nsat_bitmap_ffs #(.N(SLOTS)) u_ffs (.bits(fired), .found(f_found), .index(f_idx));

  assign r0   = route0[f_idx];
  assign r1   = route1[f_idx];
  assign busy = f_found;

  always_comb begin
    back_valid = f_found && r0[15] && r0[14];
    back_axon  = $clog2(N_AXON)'(r1);
    back_delay = r0[11:8];
    pkt        = '0;
    pkt.valid  = f_found && r0[15] && !r0[14];
    pkt.spike  = 1'b1;
    pkt.core_id = r0[5:0];
    pkt.delay  = r0[11:8];
    pkt.neuron_id = r1;
    // a neuron leaves the bitmap when its spike has been handed on
    take = f_found && (!r0[15] || r0[14] || pkt_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fired  <= '0;
      n_out  <= '0;
      n_back <= '0;
    end else begin
      if (take) fired[f_idx] <= 1'b0;
      if (spk_valid)
        for (int l = 0; l < N_COMP; l++)
          if (spk_mask[l]) fired[SA_W'({spk_row, 3'(l)} >> log2k)] <= 1'b1;
      if (pkt.valid && pkt_ready) n_out <= n_out + 1;
      if (back_valid) n_back <= n_back + 1;
    end
  end

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == SEL_AXON) begin
      if (cfg.addr[0]) route1[SA_W'(cfg.addr >> 1)] <= cfg.wdata;
      else             route0[SA_W'(cfg.addr >> 1)] <= cfg.wdata;
    end
  end

  assign cfg_rdata = (cfg.sel != SEL_AXON) ? 16'h0 :
                     cfg.addr[0] ? route1[SA_W'(cfg.addr >> 1)] : route0[SA_W'(cfg.addr >> 1)];

  initial
    for (int s = 0; s < SLOTS; s++) begin route0[s] = '0; route1[s] = '0; end

endmodule
