// nsat_packetizer -- outgoing half of a core's always-on router interface.
//
// Merges the two packet sources of a core, read responses of the
// de-packetizer and spike packets of the axon module, into one FIFO
// towards the router.  Responses have priority; each source sees its
// ready only when it wins and the FIFO has room.  Output is a valid/ready
// stream of 33-bit packets.  The paper names the block; the priority and
// the FIFO depth are this design's.
module nsat_packetizer
  import nsat_pkg::*;
#(
  parameter int DEPTH = 4
)(
  input  logic     clk,
  input  logic     rst_n,
  input  aer_pkt_t spk_pkt,
  output logic     spk_ready,
  input  aer_pkt_t resp_pkt,
  output logic     resp_ready,
  output aer_pkt_t out_pkt,
  input  logic     out_ready
);

  logic     f_ready, o_valid;
  aer_pkt_t sel, o_data;

  always_comb begin
    resp_ready = f_ready;
    spk_ready  = f_ready && !resp_pkt.valid;
    sel        = resp_pkt.valid ? resp_pkt : spk_pkt;
  end

  nsat_fifo #(.WIDTH($bits(aer_pkt_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid(sel.valid), .in_ready(f_ready), .in_data(sel),
    .out_valid(o_valid), .out_ready(out_ready), .out_data(o_data), .count());

  always_comb begin
    out_pkt       = o_data;
    out_pkt.valid = o_valid;
  end

endmodule
