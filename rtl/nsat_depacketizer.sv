// nsat_depacketizer -- incoming half of a core's always-on router interface.
//
// Buffers packets from the router in a FIFO and decodes them by their
// type bits:
//   spike (Spike=1)        -> spk_* (axon = NeuronID, with Delay), always
//                             taken by the delay array
//   write, Init=1          -> set the configuration address: memory select
//                             = Delay, word address = NeuronID
//   write, Init=0          -> write NeuronID as a 16-bit word at the current
//                             address, then advance the address
//   read                   -> read the word at (Delay, NeuronID) and send a
//                             response packet (Rd=1, Init=1, CoreID = this
//                             core, Delay = select, NeuronID = data)
// Writes and reads wait for cfg_ready (core idle), reads also for
// resp_ready.  cfg is combinational from the FIFO head; fifo_busy tells the
// clock gate that the core clock is needed.  The three packet kinds and
// their use of the Neuron and Delay fields follow the paper; the address
// register with auto-increment and the response format are this design's.
module nsat_depacketizer
  import nsat_pkg::*;
#(
  parameter logic [CORE_ID_W-1:0] CORE_ID = '0,
  parameter int DEPTH = 4
)(
  input  logic        clk,
  input  logic        rst_n,
  input  aer_pkt_t    in_pkt,
  output logic        in_ready,
  output logic        spk_valid,
  output logic [15:0] spk_axon,
  output logic [DELAY_W-1:0] spk_delay,
  output cfg_bus_t    cfg,
  input  logic        cfg_ready,
  input  logic [15:0] cfg_rdata,
  output aer_pkt_t    resp_pkt,
  input  logic        resp_ready,
  output logic        fifo_busy
);

  aer_pkt_t    head;
  logic        h_valid, h_take;
  logic [3:0]  sel_q;
  logic [15:0] addr_q;

  nsat_fifo #(.WIDTH($bits(aer_pkt_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid(in_pkt.valid), .in_ready, .in_data(in_pkt),
    .out_valid(h_valid), .out_ready(h_take), .out_data(head), .count());

  assign fifo_busy = h_valid;

  always_comb begin
    spk_valid = h_valid && head.spike;
    spk_axon  = head.neuron_id;
    spk_delay = head.delay;
    cfg       = '0;
    resp_pkt  = '0;
    h_take    = 1'b0;
    if (h_valid) begin
      if (head.spike) h_take = 1'b1;
      else if (head.wr && head.init) h_take = 1'b1;
      else if (head.wr) begin
        cfg.we    = cfg_ready;
        cfg.sel   = cfg_sel_e'(sel_q);
        cfg.addr  = addr_q;
        cfg.wdata = head.neuron_id;
        h_take    = cfg_ready;
      end else if (head.rd) begin
        cfg.re    = 1'b1;
        cfg.sel   = cfg_sel_e'(head.delay);
        cfg.addr  = head.neuron_id;
        resp_pkt.valid     = cfg_ready;
        resp_pkt.rd        = 1'b1;
        resp_pkt.init      = 1'b1;
        resp_pkt.core_id   = CORE_ID;
        resp_pkt.delay     = head.delay;
        resp_pkt.neuron_id = cfg_rdata;
        h_take    = cfg_ready && resp_ready;
      end else h_take = 1'b1;   // empty packet type: dropped
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q <= '0; addr_q <= '0;
    end else if (h_valid && h_take && head.wr && !head.spike) begin
      if (head.init) begin sel_q <= head.delay; addr_q <= head.neuron_id; end
      else addr_q <= addr_q + 16'd1;
    end
  end

endmodule
