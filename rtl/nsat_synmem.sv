// nsat_synmem -- synaptic weight memory of an NSAT core.
//
// Turns an incoming spike (an axon index) into the stream of its fanout
// weights.  Storage is split, as in the paper, into a pointer array and a
// weight data array, with a decoder in front and a decompression engine
// behind:
//
//   pointer array  one entry per axon: first data word, number of words,
//                  destination base slot.  Several axons may point at the
//                  same words, which shares weights (e.g. convolutions).
//   weight data    16-bit words {skip[7:0], weight[7:0]}, 64 Ki words
//                  (128 KB).  Zero weights of missing connections are not
//                  stored: skip is the run of skipped destination slots
//                  before this weight (run-length encoding).
//   decoder        picks one of BANKS physical arrays from the top address
//                  bits.
//   decompression  rebuilds the destination slot of every weight:
//                  dest0 = base + skip0, dest_k = dest_(k-1) + 1 + skip_k.
//
// Timing: req is taken when ready (idle).  One cycle later the pointer is
// read; from then on one fanout weight per cycle is presented on fo_* for
// exactly one cycle (no back-pressure), fo_last marking the final one.  A
// write-back of a learned weight (wb_*) replaces the weight byte of a word
// and keeps its skip byte; it may be issued in the same cycle as the
// weight is presented.  Configuration writes/reads (cfg) reach both arrays
// while the engine is idle.
// The two arrays, the decoder, RLE of zero weights and pointer sharing are
// the paper's; the word format, the skip field and the bank count are
// this design's choices.
module nsat_synmem
  import nsat_pkg::*;
#(
  parameter int N_AXON     = 4096,
  parameter int WMEM_WORDS = 65536,
  parameter int BANKS      = 8
)(
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  cfg_bus_t    cfg,
  output logic [15:0] cfg_rdata,
  // spike request
  input  logic        req_valid,
  input  logic [$clog2(N_AXON)-1:0] req_axon,
  output logic        ready,
  // fanout stream
  output logic        fo_valid,
  output logic [$clog2(N_SLOTS)-1:0] fo_dest,
  output weight_t     fo_weight,
  output logic [$clog2(WMEM_WORDS)-1:0] fo_waddr,
  output logic        fo_last,
  // learned weight write-back
  input  logic        wb_en,
  input  logic [$clog2(WMEM_WORDS)-1:0] wb_addr,
  input  weight_t     wb_weight
);

  localparam int AA_W = $clog2(N_AXON);
  localparam int WA_W = $clog2(WMEM_WORDS);
  localparam int BW   = WMEM_WORDS / BANKS;
  localparam int BA_W = $clog2(BW);
  localparam int BS_W = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int DS_W = $clog2(N_SLOTS);

  logic [WA_W-1:0] ptr_addr [N_AXON];
  logic [12:0]     ptr_cnt  [N_AXON];
  logic [DS_W-1:0] ptr_base [N_AXON];
  logic [15:0]     wmem     [BANKS][BW];

  // decoder: bank select and row address
  function automatic logic [BS_W-1:0] bank_of(input logic [WA_W-1:0] a);
    return (BANKS > 1) ? BS_W'(a / BW) : '0;
  endfunction
  function automatic logic [BA_W-1:0] row_of(input logic [WA_W-1:0] a);
    return BA_W'(a % BW);
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_PTR, S_WALK} st_e;
  st_e st;

  logic [AA_W-1:0] axon_q;
  logic [WA_W-1:0] cur_addr;
  logic [12:0]     remain;
  logic [DS_W-1:0] dest_prev;
  logic            first;
  logic [15:0]     word;

  assign ready = (st == S_IDLE);
  assign word  = wmem[bank_of(cur_addr)][row_of(cur_addr)];

  always_comb begin
    fo_valid  = (st == S_WALK);
    fo_weight = weight_t'(word[7:0]);
    fo_waddr  = cur_addr;
    fo_last   = (remain == 13'd1);
    if (first) fo_dest = DS_W'(dest_prev + DS_W'(word[15:8]));
    else       fo_dest = DS_W'(dest_prev + DS_W'(word[15:8]) + 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      axon_q    <= '0;
      cur_addr  <= '0;
      remain    <= '0;
      dest_prev <= '0;
      first     <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (req_valid) begin
          axon_q <= req_axon;
          st     <= S_PTR;
        end
        S_PTR: begin
          cur_addr  <= ptr_addr[axon_q];
          remain    <= ptr_cnt[axon_q];
          dest_prev <= ptr_base[axon_q];
          first     <= 1'b1;
          st        <= (ptr_cnt[axon_q] == 13'd0) ? S_IDLE : S_WALK;
        end
        S_WALK: begin
          dest_prev <= fo_dest;
          first     <= 1'b0;
          cur_addr  <= WA_W'(cur_addr + 1'b1);
          remain    <= remain - 13'd1;
          if (remain == 13'd1) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // memory writes: learning write-back, configuration
  always_ff @(posedge clk) begin
    if (wb_en)
      wmem[bank_of(wb_addr)][row_of(wb_addr)][7:0] <= wb_weight;
    else if (cfg.we && cfg.sel == SEL_WDATA && st == S_IDLE)
      wmem[bank_of(WA_W'(cfg.addr))][row_of(WA_W'(cfg.addr))] <= cfg.wdata;
    if (cfg.we && cfg.sel == SEL_PTR && st == S_IDLE) begin
      unique case (cfg.addr[1:0])
        2'd0:    ptr_addr[AA_W'(cfg.addr >> 2)] <= WA_W'(cfg.wdata);
        2'd1:    ptr_cnt [AA_W'(cfg.addr >> 2)] <= cfg.wdata[12:0];
        default: ptr_base[AA_W'(cfg.addr >> 2)] <= DS_W'(cfg.wdata);
      endcase
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (cfg.sel == SEL_WDATA)
      cfg_rdata = wmem[bank_of(WA_W'(cfg.addr))][row_of(WA_W'(cfg.addr))];
    else if (cfg.sel == SEL_PTR) begin
      unique case (cfg.addr[1:0])
        2'd0:    cfg_rdata = 16'(ptr_addr[AA_W'(cfg.addr >> 2)]);
        2'd1:    cfg_rdata = 16'(ptr_cnt [AA_W'(cfg.addr >> 2)]);
        default: cfg_rdata = 16'(ptr_base[AA_W'(cfg.addr >> 2)]);
      endcase
    end
  end

  // a write-back always targets the word being presented
  a_wb_in_walk: assert property (@(posedge clk) disable iff (!rst_n)
                                 wb_en |-> (st == S_WALK));

endmodule
