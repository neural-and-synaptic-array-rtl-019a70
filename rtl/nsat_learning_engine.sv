// nsat_learning_engine -- three-factor STDP learning engine of an NSAT core.
//
// Implements the forward-table, pre-synaptic event-triggered,
// nearest-neighbour STDP rule: weights are only ever looked up from the
// pre-synaptic side (the axon whose fanout is being read), and one timer
// per neuron replaces spike-time lists.
//
//   STDP counters  cnt_pre per axon and cnt_post per neuron count time steps
//                  since the last spike (saturating at 2^CNT_W-1, which
//                  also means "never").  tick increments all of them at
//                  once (the paper's latch-based counter memory allows
//                  parallel updates); a pre counter that reaches tstdp is
//                  marked expired.
//   causal part    for a post neuron that fired after the last pre spike
//                  (cnt_post < cnt_pre): dt = cnt_pre - cnt_post.  Done when
//                  the axon spikes again within the window, or, when the
//                  window closes first, in a causal-only pass of the
//                  expired axon (c_causal_only).
//   acausal part   at a pre spike, for a post neuron that fired within the
//                  window before it: dt = cnt_post.
//   kernel         three segments [0,t0), [t0,t1), [t1,tstdp); segment k
//                  contributes (+-)(x_m d h_k), with x_m the post neuron's
//                  modulator component; in exponential mode the exponent
//                  falls by one every 2^sl_k steps into the segment.
//   state rule     with STDP off, a plastic synapse gets (+-)(x_m d h_ac0)
//                  at every pre spike (acausal pipeline only).
//   rounding       randomized rounding keeps dw >> r and adds 1 with the
//                  probability given by the r dropped bits.
//   new weight     Clip(w + dw) to [-128, 127].
//
// Interface: the c_* port is combinational and evaluates one synapse per
// cycle for the spike engine of the core.  pre_clr (after the fanout walk
// of a spike) zeroes an axon's counter and expired flag; exp_clr clears an
// expired flag after its causal pass; spk_* zeroes the post counters of
// the neurons that spiked.  exp_valid/exp_axon offer the lowest expired
// axon.  Learning parameters are loaded through cfg (SEL_LPAR).
// The rule, the counters, the causal/acausal split, the kernel parameters
// (length, height, sign, slope for each side), randomized rounding and
// clipping follow the paper; the segment encoding, the exponent-decay form
// of the exponential kernel, the one core-wide window tstdp and the
// counter width are this design's choices.
module nsat_learning_engine
  import nsat_pkg::*;
#(
  parameter int N_AXON = 4096,
  parameter int ROWS   = N_SLOTS / N_COMP
)(
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_bus_t    cfg,
  input  logic [1:0]  log2k,
  input  logic        learn_en,
  input  logic [CNT_W-1:0] tstdp,
  input  logic [3:0]  rr_bits,
  // counters
  input  logic        tick,
  input  logic        pre_clr,
  input  logic [$clog2(N_AXON)-1:0] pre_axon,
  input  logic        exp_clr,
  input  logic [$clog2(N_AXON)-1:0] exp_clr_axon,
  input  logic        spk_valid,
  input  logic [$clog2(ROWS)-1:0] spk_row,
  input  logic [N_COMP-1:0] spk_mask,
  output logic        exp_valid,
  output logic [$clog2(N_AXON)-1:0] exp_axon,
  // synapse evaluation
  input  logic [$clog2(N_AXON)-1:0] c_axon,
  input  logic        c_causal_only,
  input  logic [$clog2(ROWS*N_COMP)-1:0] c_dest,
  input  logic [2:0]  c_grp,
  input  state_t      c_mod,
  input  weight_t     c_w,
  input  logic [15:0] c_rand,
  output weight_t     c_new_w,
  output logic        c_update,
  output logic        c_causal_hit,
  output logic        c_acausal_hit
);

  localparam int SLOTS = ROWS * N_COMP;
  localparam int AA_W  = $clog2(N_AXON);
  localparam int SA_W  = $clog2(SLOTS);
  localparam logic [CNT_W-1:0] CMAX = '1;

  logic [CNT_W-1:0] cnt_pre  [N_AXON];
  logic [CNT_W-1:0] cnt_post [SLOTS];
  logic [N_AXON-1:0] expired;
  lpar_t            lpar [N_GROUP][N_COMP];

  // ------------------------------------------------------------- counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < N_AXON; a++) cnt_pre[a] <= CMAX;
      for (int n = 0; n < SLOTS; n++)  cnt_post[n] <= CMAX;
      expired <= '0;
    end else begin
      if (tick) begin
        for (int a = 0; a < N_AXON; a++)
          if (cnt_pre[a] != CMAX) begin
            cnt_pre[a] <= cnt_pre[a] + 1'b1;
            if (cnt_pre[a] + 1'b1 == tstdp) expired[a] <= 1'b1;
          end
        for (int n = 0; n < SLOTS; n++)
          if (cnt_post[n] != CMAX) cnt_post[n] <= cnt_post[n] + 1'b1;
      end
      if (exp_clr) expired[exp_clr_axon] <= 1'b0;
      if (pre_clr) begin
        cnt_pre[pre_axon] <= '0;
        expired[pre_axon] <= 1'b0;
      end
      if (spk_valid)
        for (int l = 0; l < N_COMP; l++)
          if (spk_mask[l]) cnt_post[SA_W'({spk_row, 3'(l)} >> log2k)] <= '0;
    end
  end

  nsat_bitmap_ffs #(.N(N_AXON)) u_exp_ffs (.bits(expired), .found(exp_valid), .index(exp_axon));

  // --------------------------------------------------------------- kernel
  function automatic logic signed [39:0] kern(input kside_t k, input logic exp_on,
                                              input logic [CNT_W-1:0] dt,
                                              input state_t xm);
    int seg, start, e;
    logic signed [39:0] v;
    if (dt < k.t0)      begin seg = 0; start = 0; end
    else if (dt < k.t1) begin seg = 1; start = int'(k.t0); end
    else                begin seg = 2; start = int'(k.t1); end
    e = int'(k.h[seg]);
    if (exp_on) e = e - ((int'(dt) - start) >> int'(k.sl[seg]));
    if (e < -16) e = -16;
    v = dshift(shamt_t'(e), 24'(xm));
    return k.s[seg] ? -v : v;
  endfunction

  logic [SA_W-1:0]   c_n;
  lpar_t             lp;
  logic [CNT_W-1:0]  cpre, cpost;
  logic signed [39:0] dw, dwr;
  logic [15:0]       rmask;

  always_comb begin
    c_n   = SA_W'(c_dest >> log2k);
    lp    = lpar[c_grp][3'(c_dest) & 3'((1 << log2k) - 1)];
    cpre  = cnt_pre[c_axon];
    cpost = cnt_post[c_n];
    dw    = '0;
    c_causal_hit  = 1'b0;
    c_acausal_hit = 1'b0;
    if (lp.plastic && lp.stdp_on) begin
      if ((c_causal_only || cpre < tstdp) && cpost < cpre && (cpre - cpost) < tstdp) begin
        c_causal_hit = 1'b1;
        dw = dw + kern(lp.ca, lp.exp_on, cpre - cpost, c_mod);
      end
      if (!c_causal_only && cpost < tstdp) begin
        c_acausal_hit = 1'b1;
        dw = dw + kern(lp.ac, lp.exp_on, cpost, c_mod);
      end
    end else if (lp.plastic && !c_causal_only) begin
      c_acausal_hit = 1'b1;
      dw = lp.ac.s[0] ? -dshift(lp.ac.h[0], 24'(c_mod)) : dshift(lp.ac.h[0], 24'(c_mod));
    end
    rmask = 16'((17'd1 << rr_bits) - 1);
    if (lp.rr_on && rr_bits != 0)
      dwr = (dw >>> rr_bits) + (((c_rand & rmask) < (16'(dw) & rmask)) ? 40'sd1 : 40'sd0);
    else
      dwr = dw;
    c_new_w  = clip_weight(40'(c_w) + dwr);
    c_update = learn_en && (c_causal_hit || c_acausal_hit);
  end

  // ------------------------------------------------------ configuration
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == SEL_LPAR) begin
      automatic logic [2:0] g = cfg.addr[10:8];
      automatic logic [2:0] c = cfg.addr[7:5];
      automatic int         p = int'(cfg.addr[4:0]);
      unique case (p)
        LP_FLAGS: begin lpar[g][c].plastic <= cfg.wdata[0]; lpar[g][c].stdp_on <= cfg.wdata[1];
                        lpar[g][c].exp_on  <= cfg.wdata[2]; lpar[g][c].rr_on   <= cfg.wdata[3]; end
        LP_TCA0: lpar[g][c].ca.t0 <= cfg.wdata[CNT_W-1:0];
        LP_TCA1: lpar[g][c].ca.t1 <= cfg.wdata[CNT_W-1:0];
        LP_HICA0, LP_HICA0+1, LP_HICA0+2: lpar[g][c].ca.h[p-LP_HICA0] <= shamt_t'(cfg.wdata[4:0]);
        LP_SICA: lpar[g][c].ca.s <= cfg.wdata[2:0];
        LP_SLCA0, LP_SLCA0+1, LP_SLCA0+2: lpar[g][c].ca.sl[p-LP_SLCA0] <= cfg.wdata[3:0];
        LP_TAC0: lpar[g][c].ac.t0 <= cfg.wdata[CNT_W-1:0];
        LP_TAC1: lpar[g][c].ac.t1 <= cfg.wdata[CNT_W-1:0];
        LP_HIAC0, LP_HIAC0+1, LP_HIAC0+2: lpar[g][c].ac.h[p-LP_HIAC0] <= shamt_t'(cfg.wdata[4:0]);
        LP_SIAC: lpar[g][c].ac.s <= cfg.wdata[2:0];
        LP_SLAC0, LP_SLAC0+1, LP_SLAC0+2: lpar[g][c].ac.sl[p-LP_SLAC0] <= cfg.wdata[3:0];
        default: ;
      endcase
    end
  end

  initial
    for (int g = 0; g < N_GROUP; g++)
      for (int c = 0; c < N_COMP; c++) lpar[g][c] = '0;

endmodule
