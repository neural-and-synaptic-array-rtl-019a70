// nsat_neuron_eval -- neuron evaluation unit of an NSAT core.
//
// Holds the neuron state memory (ROWS rows of N_COMP 16-bit components),
// the neuron configuration memory (a parameter group per neuron, neuron
// parameters and an A matrix per group) and the refractory counters, and
// evaluates the NSAT dynamics once per time step in a 4-stage pipeline:
// all components of a row are updated in parallel, the rows are
// time-multiplexed, one row enters per cycle.
//
// A row is always N_COMP slots; the neuron mode log2k (0..3) cuts it into
// neurons of K = 2^log2k components (8 x 1, 4 x 2, 2 x 4 or 1 x 8), so the
// same memory holds 4096 one-component or 512 eight-component neurons.
// Coupling through A is only allowed between lanes of the same neuron, and
// lane 0 of a neuron is its membrane component x0.
//
//   S0  read state row, group and refractory count of each lane's neuron,
//       and request the row's accumulated input from the accumulator
//   S1  fetch parameters; x1 = x + A dd x + b + noise      (integrate)
//   S2  refractory clamp of x0, spike test x0 >= theta (or x0 >= x1 when
//       the adaptive threshold flag is set), add synaptic input, clip
//   S3  reset (or spike increment) of a spiking neuron's components,
//       reload of the refractory counter, write back, spike output
//
// Interface: start launches a full pass over ROWS rows; done pulses when
// the last row has been written; ROWS + 4 cycles in all.  spk_* gives, per
// written row, the lanes that are lane 0 of a neuron that spiked.  The
// q_* port lets the learning engine read, combinationally, the group, the
// blank-out probability of a destination slot and the plasticity
// modulator state of its neuron.  Configuration words reach every memory
// through cfg (only while idle).
// The pipeline depth, the parallel components and the time multiplexing
// are the paper's; the stage contents follow the paper's algorithm.  The
// parameter grouping, the row/lane organisation of the reconfigurable
// neuron size, the blocking of spikes during the refractory period and the
// use of one noise generator per lane are this design's choices.
module nsat_neuron_eval
  import nsat_pkg::*;
#(
  parameter int ROWS = N_SLOTS / N_COMP
)(
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_bus_t    cfg,
  output logic [15:0] cfg_rdata,
  input  logic [1:0]  log2k,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // accumulated synaptic input
  output logic        acc_rd_en,
  output logic [$clog2(ROWS)-1:0] acc_rd_row,
  input  logic signed [N_COMP-1:0][ACC_W-1:0] acc_rd_data,
  // spikes
  output logic        spk_valid,
  output logic [$clog2(ROWS)-1:0] spk_row,
  output logic [N_COMP-1:0] spk_mask,
  // query port for the learning engine
  input  logic [$clog2(ROWS*N_COMP)-1:0] q_slot,
  output logic [2:0]  q_grp,
  output state_t      q_mod,
  output logic [7:0]  q_prob
);

  localparam int SLOTS = ROWS * N_COMP;
  localparam int RA_W  = $clog2(ROWS);
  localparam int SA_W  = $clog2(SLOTS);
  localparam int LA_W  = $clog2(N_COMP);

  // ------------------------------------------------------------ memories
  state_t           state [ROWS][N_COMP];
  logic [2:0]       ngrp  [SLOTS];
  logic [CNT_W-1:0] refc  [SLOTS];
  npar_t            npar  [N_GROUP][N_COMP];
  acoef_t           amat  [N_GROUP][N_COMP][N_COMP];

  logic [3:0] kmask;   // K-1
  assign kmask = 4'((1 << log2k) - 1);

  function automatic logic [SA_W-1:0] neuron_of(input logic [RA_W-1:0] r,
                                                input int l, input logic [1:0] lk);
    return SA_W'(({r, LA_W'(l)}) >> lk);
  endfunction

  // ----------------------------------------------------------- sequencing
  logic            run;
  logic [RA_W-1:0] issue_row;
  logic            v1, v2, v3;
  logic [RA_W-1:0] r1, r2, r3;

  assign busy       = run | v1 | v2 | v3;
  assign acc_rd_en  = run;
  assign acc_rd_row = issue_row;

  // stage registers
  state_t [N_COMP-1:0] x_s1, x1_s2, x2_s3;
  logic   [N_COMP-1:0][2:0] g_s1, g_s2, g_s3;
  logic   [N_COMP-1:0][CNT_W-1:0] ref_s1, ref_s2, ref_s3;
  logic   [N_COMP-1:0] spk_s3;

  // ------------------------------------------------------------ S1 logic
  npar_t  [N_COMP-1:0] p1, p2, p3;
  state_t [N_COMP-1:0] x1, x1c, x2, x3;
  logic   [N_COMP-1:0] spike2;
  logic   [N_COMP-1:0][CNT_W-1:0] ref_n2;
  state_t [N_COMP-1:0] gauss;

  for (genvar l = 0; l < N_COMP; l++) begin : g_lane
    acoef_t [N_COMP-1:0] arow;
    logic   [N_COMP-1:0] lmask;
    always_comb begin
      for (int j = 0; j < N_COMP; j++) begin
        arow[j]  = amat[g_s1[l]][l & int'(kmask)][j & int'(kmask)];
        lmask[j] = ((j >> log2k) == (l >> log2k));
      end
      p1[l] = npar[g_s1[l]][l & int'(kmask)];
      p2[l] = npar[g_s2[l]][l & int'(kmask)];
      p3[l] = npar[g_s3[l]][l & int'(kmask)];
    end

    nsat_rng #(.SEED(32'hace1_0000 + 32'(l) * 32'h0101_7f3d)) u_rng (
      .clk, .rst_n, .en(v1), .uniform(), .gauss(gauss[l]));

    nsat_neuron_lane u_lane (
      .x_row(x_s1), .a_row(arow), .lane_mask(lmask), .x_self(x_s1[l]),
      .bias(p1[l].bias), .sigma_en(p1[l].sigma_en), .sigma(p1[l].sigma),
      .gauss(gauss[l]), .x1(x1[l]),
      .x1_in(x1c[l]), .acc(acc_s2[l]), .w_gain(p2[l].w_gain),
      .x_low(p2[l].x_low), .x_up(p2[l].x_up), .x2(x2[l]),
      .x2_in(x2_s3[l]), .spike(spk_s3[l]), .reset_on(p3[l].reset_on),
      .x_reset(p3[l].x_reset), .x_incr(p3[l].x_incr), .x3(x3[l]));
  end

  // ------------------------------------------------------------ S2 logic
  logic signed [N_COMP-1:0][ACC_W-1:0] acc_s2;
  always_comb begin
    x1c    = x1_s2;
    spike2 = '0;
    ref_n2 = ref_s2;
    for (int l = 0; l < N_COMP; l++) begin
      if ((l & int'(kmask)) == 0) begin
        logic refr, fire;
        refr = (ref_s2[l] != '0);
        if (refr) begin
          ref_n2[l] = ref_s2[l] - 1'b1;
          x1c[l]    = p2[l].x_reset;
        end
        if (p2[l].flag_xth && log2k != 2'd0) fire = (x1c[l] >= x1_s2[l+1 < N_COMP ? l+1 : l]);
        else                                 fire = (x1c[l] >= p2[l].x_thr);
        fire = fire && p2[l].spike_en && !refr;
        for (int j = 0; j < N_COMP; j++)
          if ((j >> log2k) == (l >> log2k)) begin
            spike2[j] = fire;
            if (fire && j == l) ref_n2[l] = p2[l].t_ref;
          end
      end
    end
  end

  // ------------------------------------------------------------ pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; issue_row <= '0;
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
      r1 <= '0; r2 <= '0; r3 <= '0;
      done <= 1'b0;
    end else begin
      done <= v3 && (r3 == RA_W'(ROWS - 1));
      if (start && !busy) begin
        run <= 1'b1; issue_row <= '0;
      end else if (run) begin
        if (issue_row == RA_W'(ROWS - 1)) run <= 1'b0;
        issue_row <= RA_W'(issue_row + 1'b1);
      end
      v1 <= run; r1 <= issue_row;
      v2 <= v1;  r2 <= r1;
      v3 <= v2;  r3 <= r2;
    end
  end

  always_ff @(posedge clk) begin
    // S0 -> S1
    for (int l = 0; l < N_COMP; l++) begin
      x_s1[l]   <= state[issue_row][l];
      g_s1[l]   <= ngrp[neuron_of(issue_row, l, log2k)];
      ref_s1[l] <= refc[neuron_of(issue_row, l, log2k)];
    end
    // S1 -> S2
    x1_s2  <= x1;
    g_s2   <= g_s1;
    ref_s2 <= ref_s1;
    acc_s2 <= acc_rd_data;
    // S2 -> S3
    x2_s3  <= x2;
    g_s3   <= g_s2;
    ref_s3 <= ref_n2;
    spk_s3 <= spike2;
    // S3 write back
    if (v3) begin
      for (int l = 0; l < N_COMP; l++) begin
        state[r3][l] <= x3[l];
        if ((l & int'(kmask)) == 0) refc[neuron_of(r3, l, log2k)] <= ref_s3[l];
      end
    end else if (cfg.we && !busy) begin
      unique case (cfg.sel)
        SEL_STATE: state[RA_W'(cfg.addr >> LA_W)][LA_W'(cfg.addr)] <= state_t'(cfg.wdata);
        SEL_NGRP:  begin ngrp[SA_W'(cfg.addr)] <= cfg.wdata[2:0];
                         refc[SA_W'(cfg.addr)] <= '0; end
        SEL_AMAT:  amat[cfg.addr[8:6]][cfg.addr[5:3]][cfg.addr[2:0]] <=
                     '{en: cfg.wdata[6], neg: cfg.wdata[5], sh: shamt_t'(cfg.wdata[4:0])};
        SEL_NPAR: begin
          automatic logic [2:0] g = cfg.addr[9:7];
          automatic logic [2:0] c = cfg.addr[6:4];
          unique case (int'(cfg.addr[3:0]))
            NP_BIAS:   npar[g][c].bias    <= state_t'(cfg.wdata);
            NP_XRESET: npar[g][c].x_reset <= state_t'(cfg.wdata);
            NP_XINCR:  npar[g][c].x_incr  <= state_t'(cfg.wdata);
            NP_XLOW:   npar[g][c].x_low   <= state_t'(cfg.wdata);
            NP_XUP:    npar[g][c].x_up    <= state_t'(cfg.wdata);
            NP_XTHR:   npar[g][c].x_thr   <= state_t'(cfg.wdata);
            NP_SIGMA:  begin npar[g][c].sigma_en <= cfg.wdata[5];
                             npar[g][c].sigma    <= shamt_t'(cfg.wdata[4:0]); end
            NP_WGAIN:  npar[g][c].w_gain  <= shamt_t'(cfg.wdata[4:0]);
            NP_PROB:   npar[g][c].prob    <= cfg.wdata[7:0];
            NP_TREF:   npar[g][c].t_ref   <= cfg.wdata[CNT_W-1:0];
            NP_FLAGS:  begin npar[g][c].reset_on <= cfg.wdata[0];
                             npar[g][c].flag_xth <= cfg.wdata[1];
                             npar[g][c].spike_en <= cfg.wdata[2]; end
            NP_MODG:   npar[g][c].modg    <= cfg.wdata[2:0];
            default: ;
          endcase
        end
        default: ;
      endcase
    end
  end

  assign spk_valid = v3;
  assign spk_row   = r3;
  always_comb
    for (int l = 0; l < N_COMP; l++)
      spk_mask[l] = spk_s3[l] && ((l & int'(kmask)) == 0);

  // ----------------------------------------------------------- query port
  logic [SA_W-1:0] q_n, q_ms;
  always_comb begin
    q_n    = SA_W'(q_slot >> log2k);
    q_grp  = ngrp[q_n];
    q_ms   = SA_W'((q_n << log2k) | SA_W'(npar[q_grp][0].modg & 3'(kmask)));
    q_mod  = state[RA_W'(q_ms >> LA_W)][LA_W'(q_ms)];
    q_prob = npar[q_grp][LA_W'(q_slot) & LA_W'(kmask)].prob;
  end

  // ------------------------------------------------------ configuration read
  always_comb begin
    unique case (cfg.sel)
      SEL_STATE: cfg_rdata = 16'(state[RA_W'(cfg.addr >> LA_W)][LA_W'(cfg.addr)]);
      SEL_NGRP:  cfg_rdata = 16'(ngrp[SA_W'(cfg.addr)]);
      default:   cfg_rdata = '0;
    endcase
  end

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int l = 0; l < N_COMP; l++) state[r][l] = '0;
    for (int s = 0; s < SLOTS; s++) begin ngrp[s] = '0; refc[s] = '0; end
    for (int g = 0; g < N_GROUP; g++)
      for (int c = 0; c < N_COMP; c++) begin
        npar[g][c] = '0;
        npar[g][c].x_low = 16'sh8000;
        npar[g][c].x_up  = 16'sh7fff;
        npar[g][c].x_thr = 16'sh7fff;
        for (int j = 0; j < N_COMP; j++) amat[g][c][j] = '0;
      end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> !busy);

endmodule
