// nsat_core -- one NSAT neuromorphic core.
//
// Maps up to 4096 state slots (512 eight-component neurons, or down to
// 4096 one-component neurons) with 128 KB of compressed synaptic weights,
// on-line three-factor STDP learning and spike routing.  Per time step the
// control unit runs causal learning for expired STDP counters, evaluates
// all neurons, then looks up the fanout of every spike due in this step
// (routed back from its own neurons, or received from other cores),
// applying acausal/causal learning to each synapse and accumulating its
// weight for the next step.
//
// Blocks: always-on interface (packetizer, de-packetizer, clock gate),
// config registers, control unit with the delay array, synaptic weight
// memory, weight accumulation, neuron evaluation, learning engine, axon
// module and a random number generator.  Everything but the always-on
// interface runs on the gated clock.
//
// Per fanout weight (one per cycle) the learning engine computes the new
// weight combinationally from the STDP counters, the destination neuron's
// modulator state (read from the neuron evaluation unit) and the old
// weight; the synaptic memory writes it back in the same cycle, and the
// old weight goes to the accumulator unless the Bernoulli blank-out drops
// it (drop when rand[15:8] < prob of the destination component).
// Interface: a 33-bit packet stream in each direction, start_tstep /
// done_tstep, and event counters for observation.
// Block list and data flow follow the paper; the cycle-level schedule and
// the counters are this design's.
module nsat_core
  import nsat_pkg::*;
#(
  parameter logic [CORE_ID_W-1:0] CORE_ID = '0,
  parameter int N_AXON     = 4096,
  parameter int WMEM_WORDS = 65536,
  parameter int ROWS       = N_SLOTS / N_COMP
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        test_en,
  input  aer_pkt_t    rx_pkt,
  output logic        rx_ready,
  output aer_pkt_t    tx_pkt,
  input  logic        tx_ready,
  input  logic        start_tstep,
  output logic        done_tstep,
  output logic [31:0] n_steps,
  output logic [31:0] n_causal_walks,
  output logic [31:0] n_spike_walks,
  output logic [31:0] n_updates,
  output logic [31:0] n_drops,
  output logic [31:0] n_spikes_out,
  output logic [31:0] n_spikes_back,
  output logic [31:0] gated_cycles
);

  localparam int AA_W = $clog2(N_AXON);
  localparam int SA_W = $clog2(ROWS * N_COMP);
  localparam int WA_W = $clog2(WMEM_WORDS);
  localparam int RA_W = $clog2(ROWS);

  logic gclk;
  cfg_bus_t cfg;
  logic [15:0] cfg_rdata, rd_syn, rd_eval, rd_axon, rd_gcfg;
  logic core_idle;

  // always-on interface
  logic        d_spk_valid;
  logic [15:0] d_spk_axon;
  logic [DELAY_W-1:0] d_spk_delay;
  aer_pkt_t    axon_pkt;
  logic        axon_ready;

  nsat_aon_if #(.CORE_ID(CORE_ID)) u_aon (
    .clk, .rst_n, .test_en, .rx_pkt, .rx_ready, .tx_pkt, .tx_ready,
    .gclk, .start_tstep, .core_idle,
    .spk_valid(d_spk_valid), .spk_axon(d_spk_axon), .spk_delay(d_spk_delay),
    .cfg, .cfg_rdata, .axon_pkt, .axon_ready, .gated_cycles);

  always_comb
    unique case (cfg.sel)
      SEL_WDATA, SEL_PTR:  cfg_rdata = rd_syn;
      SEL_STATE, SEL_NGRP: cfg_rdata = rd_eval;
      SEL_AXON:            cfg_rdata = rd_axon;
      SEL_GCFG:            cfg_rdata = rd_gcfg;
      default:             cfg_rdata = '0;
    endcase

  // configuration registers
  logic [1:0] log2k;
  logic learn_en;
  logic [CNT_W-1:0] tstdp;
  logic [3:0] rr_bits;

  nsat_config_regs u_gcfg (.clk(gclk), .rst_n, .cfg, .cfg_rdata(rd_gcfg),
                           .log2k, .learn_en, .tstdp, .rr_bits);

  // control unit and delay array
  logic tick, eval_start, eval_done, axon_busy;
  logic pend_valid, pop, exp_valid, exp_clr, pre_clr;
  logic [AA_W-1:0] pend_axon, exp_axon, cur_axon, req_axon;
  logic req_valid, syn_ready, causal_only;
  logic back_valid;
  logic [AA_W-1:0] back_axon;
  logic [DELAY_W-1:0] back_delay;

  nsat_core_ctrl #(.N_AXON(N_AXON)) u_ctrl (
    .clk(gclk), .rst_n, .start_tstep, .done_tstep, .learn_en,
    .tick, .eval_start, .eval_done, .axon_busy,
    .pend_valid, .pend_axon, .pop, .exp_valid, .exp_axon, .exp_clr, .pre_clr,
    .cur_axon, .req_valid, .req_axon, .syn_ready, .causal_only, .core_idle,
    .n_steps, .n_causal_walks, .n_spike_walks);

  nsat_spike_store #(.N_AXON(N_AXON)) u_store (
    .clk(gclk), .rst_n, .tick,
    .set0(back_valid), .set0_axon(back_axon), .set0_delay(back_delay),
    .set1(d_spk_valid), .set1_axon(AA_W'(d_spk_axon)), .set1_delay(d_spk_delay),
    .pend_valid, .pend_axon, .pop, .cur_slot());

  // synaptic weight memory
  logic fo_valid, fo_last;
  logic [SA_W-1:0] fo_dest;
  weight_t fo_weight;
  logic [WA_W-1:0] fo_waddr;
  logic wb_en;
  weight_t new_w;
  logic c_update;

  nsat_synmem #(.N_AXON(N_AXON), .WMEM_WORDS(WMEM_WORDS)) u_syn (
    .clk(gclk), .rst_n, .cfg, .cfg_rdata(rd_syn),
    .req_valid, .req_axon, .ready(syn_ready),
    .fo_valid, .fo_dest, .fo_weight, .fo_waddr, .fo_last,
    .wb_en, .wb_addr(fo_waddr), .wb_weight(new_w));

  // random numbers for blank-out and randomized rounding
  logic [15:0] urand;
  nsat_rng #(.SEED(32'h5eed_0000 | 32'(CORE_ID))) u_rng (
    .clk(gclk), .rst_n, .en(1'b1), .uniform(urand), .gauss());

  // neuron evaluation
  logic [2:0] q_grp;
  state_t q_mod;
  logic [7:0] q_prob;
  logic acc_rd_en;
  logic [RA_W-1:0] acc_rd_row;
  logic signed [N_COMP-1:0][ACC_W-1:0] acc_rd_data;
  logic spk_valid;
  logic [RA_W-1:0] spk_row;
  logic [N_COMP-1:0] spk_mask;

  nsat_neuron_eval #(.ROWS(ROWS)) u_eval (
    .clk(gclk), .rst_n, .cfg, .cfg_rdata(rd_eval), .log2k,
    .start(eval_start), .busy(), .done(eval_done),
    .acc_rd_en, .acc_rd_row, .acc_rd_data,
    .spk_valid, .spk_row, .spk_mask,
    .q_slot(fo_dest), .q_grp, .q_mod, .q_prob);

  // weight accumulation
  logic drop;
  assign drop = (urand[15:8] < q_prob);

  nsat_weight_accum #(.SLOTS(ROWS * N_COMP)) u_acc (
    .clk(gclk), .rst_n, .swap(tick),
    .acc_en(fo_valid && !causal_only), .acc_drop(drop), .acc_slot(fo_dest), .acc_w(fo_weight),
    .rd_en(acc_rd_en), .rd_row(acc_rd_row), .rd_data(acc_rd_data), .wr_bank());

  // learning engine
  nsat_learning_engine #(.N_AXON(N_AXON), .ROWS(ROWS)) u_learn (
    .clk(gclk), .rst_n, .cfg, .log2k, .learn_en, .tstdp, .rr_bits,
    .tick, .pre_clr, .pre_axon(cur_axon), .exp_clr, .exp_clr_axon(cur_axon),
    .spk_valid, .spk_row, .spk_mask, .exp_valid, .exp_axon,
    .c_axon(cur_axon), .c_causal_only(causal_only), .c_dest(fo_dest), .c_grp(q_grp),
    .c_mod(q_mod), .c_w(fo_weight), .c_rand({urand[7:0], urand[15:8]}),
    .c_new_w(new_w), .c_update, .c_causal_hit(), .c_acausal_hit());

  assign wb_en = fo_valid && c_update;

  // axon module
  nsat_axon #(.ROWS(ROWS), .N_AXON(N_AXON)) u_axon (
    .clk(gclk), .rst_n, .cfg, .cfg_rdata(rd_axon), .log2k,
    .spk_valid, .spk_row, .spk_mask,
    .back_valid, .back_axon, .back_delay,
    .pkt(axon_pkt), .pkt_ready(axon_ready), .busy(axon_busy),
    .n_out(n_spikes_out), .n_back(n_spikes_back));

  always_ff @(posedge gclk or negedge rst_n)
    if (!rst_n) begin n_updates <= '0; n_drops <= '0; end
    else begin
      if (wb_en) n_updates <= n_updates + 1;
      if (fo_valid && !causal_only && drop) n_drops <= n_drops + 1;
    end

endmodule
