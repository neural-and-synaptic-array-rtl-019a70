// nsat_router -- packet router of an NSAT tile.
//
// Connects the tile's AER interface (port 0) and its four cores (ports
// 1..4).  Packets are single flits, so wormhole routing reduces to one
// arbitration per packet.  Every input port has a small FIFO; every
// output port grants one of the inputs whose head packet routes to it,
// round-robin starting after the last winner, and the packet moves when
// the output is ready (one packet per output per cycle, zero-latency
// through the arbiter).
//
// Routing: read responses (Rd and Init set) go to port 0, towards the
// host; a packet whose CoreID[5:2] equals TILE_ID goes to core
// CoreID[1:0]; any other packet leaves through port 0.  A packet from port
// 0 that is not for this tile has nowhere to go and is dropped (counted in
// n_dropped).  The valid bit of a packet is its strobe.
// The 5-port single-flit router follows the paper; the FIFO depth, the
// arbitration and the routing of foreign/unknown packets are this design's.
module nsat_router
  import nsat_pkg::*;
#(
  parameter logic [CORE_ID_W-3:0] TILE_ID = '0,
  parameter int NPORT = 5,
  parameter int DEPTH = 4
)(
  input  logic     clk,
  input  logic     rst_n,
  input  aer_pkt_t in_pkt   [NPORT],
  output logic     in_ready [NPORT],
  output aer_pkt_t out_pkt  [NPORT],
  input  logic     out_ready[NPORT],
  output logic [31:0] n_routed,
  output logic [31:0] n_dropped
);

  localparam int P_W = $clog2(NPORT);

  aer_pkt_t         head   [NPORT];
  logic             hvalid [NPORT];
  logic             hpop   [NPORT];
  logic [P_W-1:0]   hdest  [NPORT];
  logic             hdrop  [NPORT];
  logic [P_W-1:0]   rr     [NPORT];
  logic [P_W-1:0]   grant  [NPORT];
  logic             gvalid [NPORT];

  function automatic logic [P_W-1:0] route(input aer_pkt_t p);
    if (p.rd && p.init)                        return '0;
    if (p.core_id[CORE_ID_W-1:2] == TILE_ID)   return P_W'(p.core_id[1:0]) + 1'b1;
    return '0;
  endfunction

  for (genvar i = 0; i < NPORT; i++) begin : g_in
    aer_pkt_t hd;
    logic [$clog2(DEPTH):0] cnt;
    nsat_fifo #(.WIDTH($bits(aer_pkt_t)), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .in_valid(in_pkt[i].valid), .in_ready(in_ready[i]), .in_data(in_pkt[i]),
      .out_valid(hvalid[i]), .out_ready(hpop[i]), .out_data(hd), .count(cnt));
    assign head[i]  = hd;
    assign hdest[i] = route(hd);
    assign hdrop[i] = (i == 0) && (route(hd) == '0);
  end

  always_comb begin
    for (int o = 0; o < NPORT; o++) begin
      gvalid[o] = 1'b0;
      grant[o]  = '0;
      for (int k = 1; k <= NPORT; k++) begin
        automatic int i = (int'(rr[o]) + k) % NPORT;
        if (!gvalid[o] && hvalid[i] && !hdrop[i] && hdest[i] == P_W'(o)) begin
          gvalid[o] = 1'b1;
          grant[o]  = P_W'(i);
        end
      end
      out_pkt[o] = gvalid[o] ? head[grant[o]] : '0;
    end
    for (int i = 0; i < NPORT; i++)
      hpop[i] = hvalid[i] && (hdrop[i] ||
                (gvalid[hdest[i]] && grant[hdest[i]] == P_W'(i) && out_ready[hdest[i]]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORT; o++) rr[o] <= P_W'(NPORT - 1);
      n_routed <= '0; n_dropped <= '0;
    end else begin
      for (int o = 0; o < NPORT; o++)
        if (gvalid[o] && out_ready[o]) rr[o] <= grant[o];
      if (hvalid[0] && hdrop[0]) n_dropped <= n_dropped + 1;
      n_routed <= n_routed + 32'(((gvalid[0] && out_ready[0]) ? 1 : 0) + ((gvalid[1] && out_ready[1]) ? 1 : 0) +
                                 ((gvalid[2] && out_ready[2]) ? 1 : 0) + ((gvalid[3] && out_ready[3]) ? 1 : 0) +
                                 ((gvalid[4] && out_ready[4]) ? 1 : 0));
    end
  end

  for (genvar o = 0; o < NPORT; o++) begin : g_chk
    a_out_strobe: assert property (@(posedge clk) disable iff (!rst_n) out_pkt[o].valid == gvalid[o]);
  end

endmodule
