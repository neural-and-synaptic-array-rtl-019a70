// nsat_config_regs -- global configuration registers of an NSAT core.
//
// Registers that apply to the whole core, written and read as 16-bit
// words through the configuration bus (SEL_GCFG):
//   0  log2k     neuron size: 2^log2k state components per neuron (0..3),
//                i.e. 4096 x 1, 2048 x 2, 1024 x 4 or 512 x 8 neurons
//   1  flags     [0] learning enable
//   2  tstdp     STDP window, in time steps (also the pre counter expiry)
//   3  rr_bits   number of low bits of dw used for randomized rounding
// Values take effect on the cycle after the write.  The paper says the
// neuron mapping and the learning strategy live in global configuration
// registers; the register list and layout are this design's.
module nsat_config_regs
  import nsat_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_bus_t    cfg,
  output logic [15:0] cfg_rdata,
  output logic [1:0]  log2k,
  output logic        learn_en,
  output logic [CNT_W-1:0] tstdp,
  output logic [3:0]  rr_bits
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      log2k    <= 2'd3;
      learn_en <= 1'b0;
      tstdp    <= CNT_W'(64);
      rr_bits  <= '0;
    end else if (cfg.we && cfg.sel == SEL_GCFG) begin
      unique case (int'(cfg.addr))
        G_LOG2K:  log2k    <= cfg.wdata[1:0];
        G_FLAGS:  learn_en <= cfg.wdata[0];
        G_TSTDP:  tstdp    <= cfg.wdata[CNT_W-1:0];
        G_RRBITS: rr_bits  <= cfg.wdata[3:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (cfg.sel == SEL_GCFG)
      unique case (int'(cfg.addr))
        G_LOG2K:  cfg_rdata = 16'(log2k);
        G_FLAGS:  cfg_rdata = 16'(learn_en);
        G_TSTDP:  cfg_rdata = 16'(tstdp);
        G_RRBITS: cfg_rdata = 16'(rr_bits);
        default:  cfg_rdata = '0;
      endcase
  end

endmodule
