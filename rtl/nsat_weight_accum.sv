// nsat_weight_accum -- double-buffered synaptic input accumulator.
//
// Two arrays of one signed word per state slot.  During a time step, one
// array (the write bank) sums the fanout weights of every spike processed
// in this step; the other (the read bank) hands the sums of the previous
// step to the neuron evaluation pipeline, one row of N_COMP slots at a
// time.  A row is cleared as it is read, so a bank is all zero when it
// becomes the write bank again.  swap, given at the start of every time
// step, exchanges the roles of the two banks.  This decouples the weight
// look-up from the neuron evaluation, as in the paper.
//
// Timing: acc_* adds one weight per cycle (sign-extended, saturating at
// ACC_W bits) unless acc_drop, the blank-out decision of a stochastic
// synapse, is set.  rd_en/rd_row return the row in rd_data on the next
// cycle and clear it.  Ping-pong banks follow the paper; the saturating
// 16-bit width and read-and-clear are this design's choices.
module nsat_weight_accum
  import nsat_pkg::*;
#(
  parameter int SLOTS = N_SLOTS
)(
  input  logic clk,
  input  logic rst_n,
  input  logic swap,
  // accumulate
  input  logic acc_en,
  input  logic acc_drop,
  input  logic [$clog2(SLOTS)-1:0] acc_slot,
  input  weight_t acc_w,
  // row read for neuron evaluation (previous step)
  input  logic rd_en,
  input  logic [$clog2(SLOTS/N_COMP)-1:0] rd_row,
  output logic signed [N_COMP-1:0][ACC_W-1:0] rd_data,
  output logic wr_bank
);

  localparam int ROWS = SLOTS / N_COMP;
  logic signed [ACC_W-1:0] bank [2][ROWS][N_COMP];

  logic [$clog2(ROWS)-1:0]   a_row;
  logic [$clog2(N_COMP)-1:0] a_lane;
  logic signed [ACC_W:0]     sum;

  assign a_row  = acc_slot[$clog2(SLOTS)-1:$clog2(N_COMP)];
  assign a_lane = acc_slot[$clog2(N_COMP)-1:0];
  assign sum    = (ACC_W+1)'(bank[wr_bank][a_row][a_lane]) + (ACC_W+1)'(acc_w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_bank <= 1'b0;
    else if (swap) wr_bank <= ~wr_bank;
  end

  always_ff @(posedge clk) begin
    if (acc_en && !acc_drop) begin
      if (sum > (ACC_W+1)'(2**(ACC_W-1)-1))
        bank[wr_bank][a_row][a_lane] <= ACC_W'(2**(ACC_W-1)-1);
      else if (sum < -(ACC_W+1)'(2**(ACC_W-1)))
        bank[wr_bank][a_row][a_lane] <= ACC_W'(-(2**(ACC_W-1)));
      else
        bank[wr_bank][a_row][a_lane] <= sum[ACC_W-1:0];
    end
    if (rd_en) begin
      for (int l = 0; l < N_COMP; l++) begin
        rd_data[l] <= bank[~wr_bank][rd_row][l];
        bank[~wr_bank][rd_row][l] <= '0;
      end
    end
  end

  initial begin
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < N_COMP; l++)
          bank[b][r][l] = '0;
  end

  a_no_swap_during_acc: assert property (@(posedge clk) disable iff (!rst_n)
                                         swap |-> !acc_en);

endmodule
