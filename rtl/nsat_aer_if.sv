// nsat_aer_if -- AER interface between an NSAT tile and the host.
//
// Converts between the tile's 33-bit packets and a 32-bit synchronous
// FIFO bus of the kind offered by a USB 3.0 FIFO bridge: the packet's
// Valid bit is the bus strobe, bits 31:0 are the data word.
//   host -> tile: while rxf_n is low (bridge has data) and the receive
//                 FIFO has room, oe_n and rd_n are held low and a word is
//                 taken on every clock with rxf_n low.
//   tile -> host: while txe_n is low (bridge has room) and the transmit
//                 FIFO holds a packet, wr_n is low with the word on data_out.
// The bus runs on the tile clock.  Receive and transmit FIFOs (DEPTH
// entries each) absorb the bus latency.  n_rx / n_tx count words.
// Using a 32-bit synchronous FIFO with Valid as strobe follows the paper;
// the handshake is a simplified form of the bridge's bus (no separate
// turnaround cycle between oe_n and rd_n), and the FIFO depths are this
// design's.
module nsat_aer_if
  import nsat_pkg::*;
#(
  parameter int DEPTH = 16
)(
  input  logic        clk,
  input  logic        rst_n,
  // bridge side
  input  logic        rxf_n,
  input  logic [31:0] data_in,
  output logic        oe_n,
  output logic        rd_n,
  input  logic        txe_n,
  output logic [31:0] data_out,
  output logic        wr_n,
  // router side
  output aer_pkt_t    to_router,
  input  logic        to_router_ready,
  input  aer_pkt_t    from_router,
  output logic        from_router_ready,
  output logic [31:0] n_rx,
  output logic [31:0] n_tx
);

  logic rx_room, rx_take, rx_valid, tx_valid, tx_take;
  logic [31:0] rx_word, tx_word;
  logic [$clog2(DEPTH):0] rx_cnt, tx_cnt;

  // keep one spare entry so the word in flight always fits
  assign rx_room = (int'(rx_cnt) < DEPTH - 1);
  assign oe_n    = !(rx_room && !rxf_n);
  assign rd_n    = oe_n;
  assign rx_take = !rd_n && !rxf_n;

  nsat_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_rx (
    .clk, .rst_n, .in_valid(rx_take), .in_ready(), .in_data(data_in),
    .out_valid(rx_valid), .out_ready(to_router_ready), .out_data(rx_word), .count(rx_cnt));

  assign to_router = rx_valid ? aer_pkt_t'({1'b1, rx_word}) : '0;

  nsat_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_tx (
    .clk, .rst_n, .in_valid(from_router.valid), .in_ready(from_router_ready),
    .in_data(from_router[31:0]),
    .out_valid(tx_valid), .out_ready(tx_take), .out_data(tx_word), .count(tx_cnt));

  assign tx_take  = tx_valid && !txe_n;
  assign wr_n     = !tx_take;
  assign data_out = tx_word;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin n_rx <= '0; n_tx <= '0; end
    else begin
      if (rx_take) n_rx <= n_rx + 1;
      if (tx_take) n_tx <= n_tx + 1;
    end

  a_rx_fits: assert property (@(posedge clk) disable iff (!rst_n) rx_take |-> int'(rx_cnt) < DEPTH);

endmodule
