// nsat_aon_if -- always-on (AON) router interface of an NSAT core.
//
// The part of a core that stays clocked: the de-packetizer (incoming
// stream), the packetizer (outgoing stream) and the clock gate that makes
// the core-logic clock.  The core clock runs while a packet waits in the
// de-packetizer, while start_tstep is raised and while the core logic
// reports that it is not idle; otherwise it is stopped and the core logic
// keeps its state (the paper's low-power retention between events).
// All ports run on the free clock except those to the core logic, which
// are sampled on the gated clock (same edges when it runs).
// The split into packetizer, de-packetizer and gated clock follows the
// paper; the enable condition is this design's.
module nsat_aon_if
  import nsat_pkg::*;
#(
  parameter logic [CORE_ID_W-1:0] CORE_ID = '0
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        test_en,
  // router side
  input  aer_pkt_t    rx_pkt,
  output logic        rx_ready,
  output aer_pkt_t    tx_pkt,
  input  logic        tx_ready,
  // core side
  output logic        gclk,
  input  logic        start_tstep,
  input  logic        core_idle,
  output logic        spk_valid,
  output logic [15:0] spk_axon,
  output logic [DELAY_W-1:0] spk_delay,
  output cfg_bus_t    cfg,
  input  logic [15:0] cfg_rdata,
  input  aer_pkt_t    axon_pkt,
  output logic        axon_ready,
  output logic [31:0] gated_cycles
);

  aer_pkt_t resp_pkt;
  logic     resp_ready, fifo_busy, clk_en;

  nsat_depacketizer #(.CORE_ID(CORE_ID)) u_depkt (
    .clk, .rst_n, .in_pkt(rx_pkt), .in_ready(rx_ready),
    .spk_valid, .spk_axon, .spk_delay, .cfg, .cfg_ready(core_idle), .cfg_rdata,
    .resp_pkt, .resp_ready, .fifo_busy);

  nsat_packetizer u_pkt (
    .clk, .rst_n, .spk_pkt(axon_pkt), .spk_ready(axon_ready),
    .resp_pkt, .resp_ready, .out_pkt(tx_pkt), .out_ready(tx_ready));

  assign clk_en = fifo_busy | start_tstep | !core_idle;

  nsat_clock_gate u_icg (.clk, .en(clk_en), .test_en, .gclk);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) gated_cycles <= '0;
    else if (!clk_en && !test_en) gated_cycles <= gated_cycles + 1;

endmodule
