// sara_systolic_cell: a CELL x CELL grid of MAC units (4 x 4 in SAGAR) with
// bypass multiplexers on its left and top edges.
//
// Inside the cell the MACs are chained by peer-to-peer links exactly as in a
// conventional systolic array. At the left edge each row chooses between the
// right output of the neighbouring cell (peer, h_byp = 0) and the cell's own
// horizontal bypass link from the operand SRAM (h_byp = 1); the top edge does
// the same for the columns with v_byp. The selects are static for a whole GEMM
// (they come from the bypass configuration register). The bottom edge drives
// both the cell below and the cell's output link towards the output buffer, so
// no mux is needed there. All MACs of the cell receive the same op, which the
// partition controller of the partition holding the cell supplies.
module sara_systolic_cell
  import sara_pkg::*;
#(
  parameter int unsigned CELL = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  mac_op_e         op,
  input  logic            h_byp,
  input  logic            v_byp,
  input  logic [DW-1:0]   peer_left  [CELL],   // from the cell on the left
  input  logic [DW-1:0]   byp_left   [CELL],   // horizontal bypass link
  input  logic [ACCW-1:0] peer_top   [CELL],   // from the cell above
  input  logic [ACCW-1:0] byp_top    [CELL],   // vertical bypass link
  output logic [DW-1:0]   right_out  [CELL],
  output logic [ACCW-1:0] bottom_out [CELL]
);

  logic [DW-1:0]   h [CELL][CELL+1];
  logic [ACCW-1:0] v [CELL+1][CELL];

  for (genvar r = 0; r < CELL; r++) begin : g_edge_l
    assign h[r][0]    = h_byp ? byp_left[r] : peer_left[r];
    assign right_out[r] = h[r][CELL];
  end
  for (genvar c = 0; c < CELL; c++) begin : g_edge_t
    assign v[0][c]       = v_byp ? byp_top[c] : peer_top[c];
    assign bottom_out[c] = v[CELL][c];
  end

  for (genvar r = 0; r < CELL; r++) begin : g_r
    for (genvar c = 0; c < CELL; c++) begin : g_c
      sara_mac u_mac (
        .clk, .rst_n, .op,
        .left_in   (h[r][c]),
        .top_in    (v[r][c]),
        .right_out (h[r][c+1]),
        .bottom_out(v[r+1][c])
      );
    end
  end

endmodule
