// nsat_tile -- one NSAT tile: four cores, a router and an AER interface.
//
// The tile connects four NSAT cores (CoreIDs {TILE_ID, 0..3}) through a
// five-port router to an AER interface that talks to the host over a
// 32-bit synchronous FIFO bus.  The host configures the cores with memory
// write packets, reads them back with memory read packets, injects spikes,
// and runs time steps with start_tstep (one pulse, all cores) and
// done_tstep (one bit per core; a step is over when all four have been
// seen).  Spikes routed out of a core travel through the router to
// another core of the tile or to the host.
//
// Interface and timing: clk drives the router, the AER interface and the
// always-on part of every core; each core gates its own clock when idle.
// core_stats[c] = {gated cycles, spikes routed back, spikes routed out,
// dropped by blank-out, weight updates, spike walks, causal walks, time
// steps} of core c.  The tile organisation (4 cores, router, AER to the
// host) follows the paper; the port list and statistics are this design's.
module nsat_tile
  import nsat_pkg::*;
#(
  parameter logic [CORE_ID_W-3:0] TILE_ID = '0,
  parameter int N_AXON     = 4096,
  parameter int WMEM_WORDS = 65536,
  parameter int ROWS       = N_SLOTS / N_COMP
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        test_en,
  // host FIFO bus
  input  logic        ft_rxf_n,
  input  logic [31:0] ft_data_in,
  output logic        ft_oe_n,
  output logic        ft_rd_n,
  input  logic        ft_txe_n,
  output logic [31:0] ft_data_out,
  output logic        ft_wr_n,
  // time step control
  input  logic        start_tstep,
  output logic [3:0]  done_tstep,
  // observation
  output logic [3:0][7:0][31:0] core_stats,
  output logic [31:0] n_routed,
  output logic [31:0] n_dropped,
  output logic [31:0] n_host_rx,
  output logic [31:0] n_host_tx
);

  aer_pkt_t r_in [5];
  logic     r_in_ready [5];
  aer_pkt_t r_out [5];
  logic     r_out_ready [5];

  nsat_router #(.TILE_ID(TILE_ID)) u_router (
    .clk, .rst_n, .in_pkt(r_in), .in_ready(r_in_ready),
    .out_pkt(r_out), .out_ready(r_out_ready), .n_routed, .n_dropped);

  nsat_aer_if u_aer (
    .clk, .rst_n, .rxf_n(ft_rxf_n), .data_in(ft_data_in), .oe_n(ft_oe_n), .rd_n(ft_rd_n),
    .txe_n(ft_txe_n), .data_out(ft_data_out), .wr_n(ft_wr_n),
    .to_router(r_in[0]), .to_router_ready(r_in_ready[0]),
    .from_router(r_out[0]), .from_router_ready(r_out_ready[0]),
    .n_rx(n_host_rx), .n_tx(n_host_tx));

  for (genvar c = 0; c < 4; c++) begin : g_core
    nsat_core #(.CORE_ID({TILE_ID, 2'(c)}), .N_AXON(N_AXON), .WMEM_WORDS(WMEM_WORDS), .ROWS(ROWS)) u_core (
      .clk, .rst_n, .test_en,
      .rx_pkt(r_out[c+1]), .rx_ready(r_out_ready[c+1]),
      .tx_pkt(r_in[c+1]), .tx_ready(r_in_ready[c+1]),
      .start_tstep, .done_tstep(done_tstep[c]),
      .n_steps(core_stats[c][0]), .n_causal_walks(core_stats[c][1]),
      .n_spike_walks(core_stats[c][2]), .n_updates(core_stats[c][3]),
      .n_drops(core_stats[c][4]), .n_spikes_out(core_stats[c][5]),
      .n_spikes_back(core_stats[c][6]), .gated_cycles(core_stats[c][7]));
  end

endmodule
