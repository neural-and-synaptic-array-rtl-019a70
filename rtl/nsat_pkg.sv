// nsat_pkg -- types, sizes and arithmetic shared by every NSAT module.
//
// The NSAT core evaluates multi-compartment integrate-and-fire neurons with
// no multipliers: every "product" is a power-of-two shift.  This package
// holds the two shift operators of the framework (the sign-correct shift
// and the zero-rounding shift), the 33-bit AER packet of the tile, the
// configuration bus used to load every memory from packets, and the memory
// map that bus addresses.
//
// Sizes that follow the paper: 16-bit state components, 8-bit weights,
// 512 neurons of 8 components (4096 state slots) per core, 128 KB of
// synaptic storage, 4 cores per tile, the packet bit positions of the
// tile's packet format, 4-bit delays.  The memory map, the parameter word
// encodings and the counter widths are this design's own choices.
package nsat_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int STATE_W   = 16;    // state component width
  localparam int W_W       = 8;     // synaptic weight width
  localparam int N_COMP    = 8;     // components evaluated in parallel (one row)
  localparam int N_SLOTS   = 4096;  // state slots per core (512 x 8 or 4096 x 1)
  localparam int N_GROUP   = 8;     // parameter groups per core
  localparam int CNT_W     = 8;     // STDP / refractory counter width
  localparam int SH_W      = 5;     // shift exponent width (signed)
  localparam int ACC_W     = 16;    // accumulated synaptic input width
  localparam int DELAY_W   = 4;     // axonal delay field width
  localparam int CORE_ID_W = 6;     // core address field width
  localparam int CFG_A_W   = 16;    // configuration word address width
  localparam int CFG_D_W   = 16;    // configuration word width

  typedef logic signed [STATE_W-1:0] state_t;
  typedef logic signed [W_W-1:0]     weight_t;
  typedef logic signed [SH_W-1:0]    shamt_t;

  // ------------------------------------------------------ AER tile packet
  // Bit 32 Valid, 31 Wr, 30 Rd, 29 Spike, 28 Init, 27:26 reserved,
  // 25:20 CoreID, 19:16 Delay, 15:0 NeuronID.
  typedef struct packed {
    logic                 valid;
    logic                 wr;
    logic                 rd;
    logic                 spike;
    logic                 init;
    logic [1:0]           rsvd;
    logic [CORE_ID_W-1:0] core_id;
    logic [DELAY_W-1:0]   delay;
    logic [15:0]          neuron_id;
  } aer_pkt_t;

  // ------------------------------------------------- configuration bus
  // One 16-bit word per access.  sel picks a memory, addr a word in it.
  typedef enum logic [3:0] {
    SEL_WDATA = 4'd0,   // weight data array: {skip[15:8], weight[7:0]}
    SEL_PTR   = 4'd1,   // pointer array: {axon, k[1:0]}: 0 addr, 1 count, 2 dest base
    SEL_STATE = 4'd2,   // neuron state memory, one slot per word
    SEL_NGRP  = 4'd3,   // parameter group of each neuron
    SEL_NPAR  = 4'd4,   // neuron parameters {grp, comp, p[3:0]}
    SEL_AMAT  = 4'd5,   // A matrix {grp, i, j}: [6] enable, [5] negative, [4:0] shift
    SEL_LPAR  = 4'd6,   // learning parameters {grp, comp, p[4:0]}
    SEL_AXON  = 4'd7,   // routing table {neuron, k}: word k of the neuron
    SEL_GCFG  = 4'd8    // global configuration registers
  } cfg_sel_e;

  typedef struct packed {
    logic               we;
    logic               re;
    cfg_sel_e           sel;
    logic [CFG_A_W-1:0] addr;
    logic [CFG_D_W-1:0] wdata;
  } cfg_bus_t;

  // neuron parameter indices (per group and component)
  localparam int NP_BIAS = 0, NP_XRESET = 1, NP_XINCR = 2, NP_XLOW = 3,
                 NP_XUP = 4, NP_XTHR = 5, NP_SIGMA = 6, NP_WGAIN = 7,
                 NP_PROB = 8, NP_TREF = 9, NP_FLAGS = 10, NP_MODG = 11;
  // learning parameter indices (per group and component)
  localparam int LP_FLAGS = 0, LP_TCA0 = 1, LP_TCA1 = 2, LP_HICA0 = 3,
                 LP_SICA = 6, LP_SLCA0 = 7, LP_TAC0 = 10, LP_TAC1 = 11,
                 LP_HIAC0 = 12, LP_SIAC = 15, LP_SLAC0 = 16;
  // global registers
  localparam int G_LOG2K = 0, G_FLAGS = 1, G_TSTDP = 2, G_RRBITS = 3;

  // per group and component neuron parameters, unpacked for the datapath
  typedef struct packed {
    state_t     bias;
    state_t     x_reset;
    state_t     x_incr;
    state_t     x_low;
    state_t     x_up;
    state_t     x_thr;
    logic       sigma_en;
    shamt_t     sigma;
    shamt_t     w_gain;
    logic [7:0] prob;
    logic [CNT_W-1:0] t_ref;
    logic       reset_on;
    logic       flag_xth;
    logic       spike_en;
    logic [2:0] modg;
  } npar_t;

  typedef struct packed {
    logic   en;
    logic   neg;
    shamt_t sh;
  } acoef_t;

  // learning parameters for one side (causal or acausal) of the kernel
  typedef struct packed {
    logic [CNT_W-1:0] t0;
    logic [CNT_W-1:0] t1;
    shamt_t [2:0]     h;
    logic [2:0]       s;     // 1 = negative segment
    logic [2:0][3:0]  sl;
  } kside_t;

  typedef struct packed {
    logic   plastic;
    logic   stdp_on;
    logic   exp_on;
    logic   rr_on;
    kside_t ca;
    kside_t ac;
  } lpar_t;

  // --------------------------------------------------- shift arithmetic
  // d(a,x): x << a for a >= 0, sign(x)(|x| >> -a) otherwise.  The result
  // is wide so that a left shift cannot wrap before saturation.
  function automatic logic signed [39:0] dshift(input shamt_t a,
                                                input logic signed [23:0] x);
    logic signed [39:0] xe;
    logic [39:0]        mag;
    int                 n;
    xe = 40'(x);
    if (a >= 0) begin
      dshift = xe <<< int'(a);
    end else begin
      n   = -int'(a);
      mag = (xe < 0) ? 40'(-xe) : 40'(xe);
      mag = mag >> n;
      dshift = (xe < 0) ? -$signed(mag) : $signed(mag);
    end
  endfunction

  // a dd x: a = 0 gives a unit step towards zero (-sign(x)), otherwise d(a,x).
  function automatic logic signed [39:0] ddshift(input shamt_t a,
                                                 input logic signed [23:0] x);
    logic signed [39:0] y;
    y = dshift(a, x);
    if (a == 0)
      ddshift = (y > 0) ? -40'sd1 : (y < 0) ? 40'sd1 : 40'sd0;
    else
      ddshift = y;
  endfunction

  function automatic state_t sat_state(input logic signed [39:0] v);
    if (v > 40'sd32767)       sat_state = 16'sh7fff;
    else if (v < -40'sd32768) sat_state = 16'sh8000;
    else                      sat_state = v[15:0];
  endfunction

  function automatic weight_t clip_weight(input logic signed [39:0] v);
    if (v > 40'sd127)       clip_weight = 8'sh7f;
    else if (v < -40'sd128) clip_weight = 8'sh80;
    else                    clip_weight = v[7:0];
  endfunction

  // lowest set bit of a 64-bit word
  function automatic logic [6:0] ffs64(input logic [63:0] v);
    ffs64 = 7'd0;
    for (int i = 63; i >= 0; i--)
      if (v[i]) ffs64 = {1'b1, 6'(i)};
  endfunction

endpackage
