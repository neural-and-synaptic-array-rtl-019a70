// nsat_fifo -- small synchronous FIFO with valid/ready handshakes.
//
// WIDTH-bit words, DEPTH entries (a power of two), registered storage.
// A word is written when in_valid && in_ready and leaves when
// out_valid && out_ready; out_data shows the oldest word.  in_ready is
// low when full, out_valid low when empty.  Used as the packet buffers of
// the always-on interface, the router and the AER interface.
module nsat_fifo #(
  parameter int WIDTH = 33,
  parameter int DEPTH = 4
)(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);

  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
    end else begin
      if (in_valid && in_ready)   wr_ptr <= AW'(wr_ptr + 1'b1);
      if (out_valid && out_ready) rd_ptr <= AW'(rd_ptr + 1'b1);
      count <= count + (AW+1)'(in_valid && in_ready) - (AW+1)'(out_valid && out_ready);
    end
  end

  always_ff @(posedge clk)
    if (in_valid && in_ready) mem[wr_ptr] <= in_data;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= (AW+1)'(DEPTH));

endmodule
