// nsat_core_ctrl -- control unit of an NSAT core.
//
// A state machine that runs one NSAT time step when start_tstep arrives
// and answers with done_tstep, triggering the smaller engines of the core
// in the order of the paper's time-step diagram:
//
//   TICK     swap the accumulation banks, advance the STDP counters and
//            the delay array's current slot (one cycle)
//   CAUSAL   causal learning: a causal-only fanout walk for every axon
//            whose STDP counter expired (only with learning enabled)
//   EVAL     neuron evaluation pass over all rows
//   SPIKE    acausal learning and weight look-up/accumulation of every
//            spike due in this step (own routed-back spikes and spikes from
//            other cores), until the delay array's current slot is empty
//            and the axon module has routed all spikes
//   DONE     done_tstep for one cycle, then IDLE
//
// It also holds the spike engine, which feeds one axon at a time to the
// synaptic weight memory: an expired axon in CAUSAL (causal-only walk), a
// pending spike of the current slot in SPIKE and IDLE (full walk, with
// accumulation).  After the walk of a spike the axon's pre counter is
// cleared; after a causal-only walk its expired flag.  Spikes that arrive
// between done_tstep and the next start_tstep are processed in IDLE and
// count for the next step.  core_idle tells the always-on interface that
// the core clock may be gated.
// The phase order and the start/done handshake follow the paper; the
// spike engine and the IDLE-time processing are this design's choices.
module nsat_core_ctrl
  import nsat_pkg::*;
#(
  parameter int N_AXON = 4096
)(
  input  logic clk,
  input  logic rst_n,
  input  logic start_tstep,
  output logic done_tstep,
  input  logic learn_en,
  // phase outputs
  output logic tick,
  output logic eval_start,
  input  logic eval_done,
  input  logic axon_busy,
  // delay array
  input  logic pend_valid,
  input  logic [$clog2(N_AXON)-1:0] pend_axon,
  output logic pop,
  // expired STDP counters
  input  logic exp_valid,
  input  logic [$clog2(N_AXON)-1:0] exp_axon,
  output logic exp_clr,
  output logic pre_clr,
  output logic [$clog2(N_AXON)-1:0] cur_axon,
  // synaptic weight memory
  output logic req_valid,
  output logic [$clog2(N_AXON)-1:0] req_axon,
  input  logic syn_ready,
  output logic causal_only,
  output logic core_idle,
  output logic [31:0] n_steps,
  output logic [31:0] n_causal_walks,
  output logic [31:0] n_spike_walks
);

  typedef enum logic [2:0] {S_IDLE, S_TICK, S_CAUSAL, S_EVAL, S_SPIKE, S_DONE} st_e;
  typedef enum logic [1:0] {E_IDLE, E_WAIT, E_BUSY, E_FIN} est_e;
  st_e  st;
  est_e est;
  logic pending_start;

  logic can_causal, can_spike;
  assign can_causal = (st == S_CAUSAL) && learn_en && exp_valid;
  assign can_spike  = (st == S_SPIKE || (st == S_IDLE && !pending_start)) && pend_valid;

  always_comb begin
    req_valid = (est == E_IDLE) && syn_ready && (can_causal || can_spike);
    req_axon  = can_causal ? exp_axon : pend_axon;
    pop       = req_valid && !can_causal;
    exp_clr   = (est == E_FIN) && causal_only;
    pre_clr   = (est == E_FIN) && !causal_only;
  end

  assign tick       = (st == S_TICK);
  assign done_tstep = (st == S_DONE);
  assign core_idle  = (st == S_IDLE) && (est == E_IDLE) && !pend_valid && !axon_busy && !pending_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; est <= E_IDLE; pending_start <= 1'b0;
      eval_start <= 1'b0; causal_only <= 1'b0; cur_axon <= '0;
      n_steps <= '0; n_causal_walks <= '0; n_spike_walks <= '0;
    end else begin
      eval_start <= 1'b0;
      if (start_tstep) pending_start <= 1'b1;
      // spike engine
      unique case (est)
        E_IDLE: if (req_valid) begin
          est <= E_WAIT; cur_axon <= req_axon; causal_only <= can_causal;
          if (can_causal) n_causal_walks <= n_causal_walks + 1;
          else            n_spike_walks  <= n_spike_walks + 1;
        end
        E_WAIT: est <= E_BUSY;
        E_BUSY: if (syn_ready) est <= E_FIN;
        default: est <= E_IDLE;
      endcase
      // time step
      unique case (st)
        S_IDLE:   if (pending_start && est == E_IDLE) begin
                    st <= S_TICK; pending_start <= start_tstep;
                  end
        S_TICK:   st <= S_CAUSAL;
        S_CAUSAL: if (!(learn_en && exp_valid) && est == E_IDLE) begin
                    st <= S_EVAL; eval_start <= 1'b1;
                  end
        S_EVAL:   if (eval_done) st <= S_SPIKE;
        S_SPIKE:  if (!pend_valid && !axon_busy && est == E_IDLE) st <= S_DONE;
        default:  begin st <= S_IDLE; n_steps <= n_steps + 1; end
      endcase
    end
  end

  a_one_walk: assert property (@(posedge clk) disable iff (!rst_n)
                               req_valid |-> est == E_IDLE);

endmodule
