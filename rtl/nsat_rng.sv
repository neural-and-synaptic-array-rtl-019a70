// nsat_rng -- hardware random number generator of an NSAT core.
//
// Four independent uniform generators run side by side.  Each is the
// LFSR/CASR pair of Tkacik (2002): a 43-bit LFSR (taps 43, 41, 20, 1) and a
// 37-bit cellular automaton shift register (rule 90 everywhere, rule 150 at
// cell 28, null boundaries), both stepped every cycle; the generator's
// 32-bit output is the XOR of the low 32 bits of the two registers.  The
// four uniform words are summed (Irwin-Hall with four terms) to give an
// approximately normal, zero-mean sample, used as additive noise on the
// state components.  The uniform word of generator 0 is also offered for
// the Bernoulli blank-out of synapses and for randomized rounding.
//
// Interface: a new sample every cycle while en is high.  Both outputs are
// registered.  gauss is (u0+u1+u2+u3 - 2^17) >> 2 over the upper 16 bits of
// each uniform word: zero mean, standard deviation about 9460.
// The paper gives the LFSR/CASR pairing and "four uniform generators
// combined into a normal sequence"; the register lengths come from the cited
// generator, and the seeding and the combination by summation are this
// design's choices.
module nsat_rng
  import nsat_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1234_5678
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [15:0] uniform,
  output state_t      gauss
);

  logic [42:0] lfsr [4];
  logic [36:0] casr [4];

  function automatic logic [42:0] lfsr_next(input logic [42:0] s);
    logic fb;
    fb = s[42] ^ s[40] ^ s[19] ^ s[0];
    return {s[41:0], fb};
  endfunction

  function automatic logic [36:0] casr_next(input logic [36:0] s);
    logic [36:0] n;
    for (int i = 0; i < 37; i++) begin
      logic l, r;
      l = (i == 0)  ? 1'b0 : s[i-1];
      r = (i == 36) ? 1'b0 : s[i+1];
      n[i] = l ^ r ^ ((i == 28) ? s[i] : 1'b0);
    end
    return n;
  endfunction

  logic [17:0] sum;
  always_comb begin
    sum = '0;
    for (int k = 0; k < 4; k++)
      sum = sum + 18'((lfsr[k][31:16] ^ casr[k][31:16]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 4; k++) begin
        lfsr[k] <= {11'h5a5, SEED ^ (32'h9e37_79b9 * (k + 1))} | 43'd1;
        casr[k] <= {5'h0b, ~SEED ^ (32'h7f4a_7c15 * (k + 3))} | 37'd1;
      end
      uniform <= '0;
      gauss   <= '0;
    end else if (en) begin
      for (int k = 0; k < 4; k++) begin
        lfsr[k] <= lfsr_next(lfsr[k]);
        casr[k] <= casr_next(casr[k]);
      end
      uniform <= lfsr[0][15:0] ^ casr[0][15:0];
      gauss   <= state_t'($signed({1'b0, sum} - 19'sd131072) >>> 2);
    end
  end

endmodule
