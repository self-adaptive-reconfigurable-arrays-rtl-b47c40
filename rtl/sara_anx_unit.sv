// sara_anx_unit: one 1-D unit of the AdaptNetX core.
//
// WIDTH signed 8-bit multipliers followed by a binary adder tree. The unit runs
// input stationary: `load` latches an input vector next to the multipliers;
// afterwards one weight row (WIDTH weights, one output neuron) is streamed in
// per cycle and the unit produces one dot product per cycle. The multiplier
// outputs are registered and the tree result is registered, so a row presented
// with w_valid in cycle t gives y_valid with its sum in cycle t+2. A tag (the
// neuron index) travels with each row. Structure (1-D multipliers, binary tree
// reduction, IS dataflow, 1 element/cycle) follows the paper; the two-stage
// pipeline split is this design's choice.
module sara_anx_unit
  import sara_pkg::*;
#(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned TAGW  = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [DW-1:0]   x_in [WIDTH],
  input  logic            w_valid,
  input  logic [DW-1:0]   w_row [WIDTH],
  input  logic [TAGW-1:0] w_tag,
  output logic            y_valid,
  output logic [ACCW-1:0] y,
  output logic [TAGW-1:0] y_tag
);

  localparam int unsigned LW = $clog2(WIDTH);

  logic [DW-1:0]     x_q  [WIDTH];
  logic [2*DW-1:0]   p_q  [WIDTH];
  logic              v1_q;
  logic [TAGW-1:0]   t1_q;
  logic [ACCW-1:0]   sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(WIDTH); i++) begin
        x_q[i] <= '0;
        p_q[i] <= '0;
      end
      v1_q    <= 1'b0;
      t1_q    <= '0;
      y_valid <= 1'b0;
      y       <= '0;
      y_tag   <= '0;
    end else begin
      if (load) x_q <= x_in;
      for (int i = 0; i < int'(WIDTH); i++)
        p_q[i] <= $signed(x_q[i]) * $signed(w_row[i]);
      v1_q    <= w_valid;
      t1_q    <= w_tag;
      y_valid <= v1_q;
      y       <= sum;
      y_tag   <= t1_q;
    end
  end

  // Binary reduction tree, reduced in place level by level: after level s the
  // first WIDTH/2^s entries hold the pairwise sums of the level below.
  always_comb begin
    logic [ACCW-1:0] t [WIDTH];
    for (int i = 0; i < int'(WIDTH); i++) t[i] = {{(ACCW-2*DW){p_q[i][2*DW-1]}}, p_q[i]};
    for (int s = 1; s <= int'(LW); s++)
      for (int i = 0; i < int'(WIDTH >> s); i++) t[i] = t[2*i] + t[2*i+1];
    sum = t[0];
  end

endmodule
