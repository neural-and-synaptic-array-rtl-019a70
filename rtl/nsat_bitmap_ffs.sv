// nsat_bitmap_ffs -- find the lowest set bit of a large bitmap in one cycle.
//
// Used wherever the core keeps events as one bit per neuron or axon (the
// delay array, the expired STDP counters, the neurons that spiked).  The
// bitmap is cut into 64-bit chunks; a 64-bit summary holds the OR of each
// chunk, a first find-first picks the lowest non-empty chunk and a second
// one the lowest bit in it.  Combinational; N up to 4096 (a size that is not a
// multiple of 64 is padded with zeros).
// The two-level search is this design's choice.
module nsat_bitmap_ffs #(
  parameter int N = 4096
)(
  input  logic [N-1:0]         bits,
  output logic                 found,
  output logic [$clog2(N)-1:0] index
);

  localparam int NCH = (N + 63) / 64;
  logic [NCH*64-1:0] padded;
  logic [63:0] summary;
  logic [6:0]  c_ffs, b_ffs;
  logic [63:0] chunk;

  always_comb begin
    padded  = (NCH*64)'(bits);
    summary = '0;
    for (int c = 0; c < NCH; c++) summary[c] = |padded[c*64 +: 64];
    c_ffs = nsat_pkg::ffs64(summary);
    chunk = padded[int'(c_ffs[5:0])*64 +: 64];
    b_ffs = nsat_pkg::ffs64(chunk);
    found = c_ffs[6];
    index = $clog2(N)'({c_ffs[5:0], b_ffs[5:0]});
  end

endmodule
