// sara_rsa_array: the Reconfigurable Systolic Array compute fabric.
//
// CELLS x CELLS systolic cells (each CELL x CELL MACs) connected by
// peer-to-peer links. Every cell also owns three dedicated links:
//   * a horizontal bypass link (CELL lanes x 8 bit) from the A scratchpad
//     slice of its cell row,
//   * a vertical bypass link (CELL lanes x 8 bit) from the B scratchpad slice of
//     its cell column,
//   * an output link (CELL lanes x 32 bit) from its bottom edge to the output
//     buffer slice of its cell column.
// Each link is pipelined (sara_bypass_link, LINK_STAGES flops). The static
// h_byp / v_byp selects make each cell either continue the array of its left /
// upper neighbour or start a new sub-array fed from its own links, so the same
// fabric acts as one 128 x 128 array, 1024 independent 4 x 4 arrays or any
// tiling in between. op[i][j] is the MAC operation for cell (i,j), supplied by
// the controller of the partition it belongs to.
// Separate input and output vertical wires (the paper shares one vertical link
// between the second operand and the outputs) are this design's choice.
module sara_rsa_array
  import sara_pkg::*;
#(
  parameter int unsigned CELLS       = 32,
  parameter int unsigned CELL        = 4,
  parameter int unsigned LINK_STAGES = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  mac_op_e         op      [CELLS][CELLS],
  input  logic            h_byp   [CELLS][CELLS],
  input  logic            v_byp   [CELLS][CELLS],
  input  logic [DW-1:0]   a_link  [CELLS][CELLS][CELL],  // SRAM side of horizontal links
  input  logic [DW-1:0]   b_link  [CELLS][CELLS][CELL],  // SRAM side of vertical links
  output logic [ACCW-1:0] o_link  [CELLS][CELLS][CELL]   // buffer side of output links
);

  for (genvar i = 0; i < CELLS; i++) begin : g_i
    for (genvar j = 0; j < CELLS; j++) begin : g_j
      logic [DW-1:0]   a_cell [CELL];
      logic [ACCW-1:0] b_cell [CELL];
      logic [DW-1:0]   pl     [CELL];
      logic [ACCW-1:0] pt     [CELL];
      logic [DW-1:0]   r_o    [CELL];   // right edge of this cell
      logic [ACCW-1:0] b_o    [CELL];   // bottom edge of this cell

      for (genvar l = 0; l < CELL; l++) begin : g_l
        logic [DW-1:0] b_raw;
        sara_bypass_link #(.WIDTH(DW), .STAGES(LINK_STAGES)) u_ha (
          .clk, .rst_n, .in_data(a_link[i][j][l]), .out_data(a_cell[l]));
        sara_bypass_link #(.WIDTH(DW), .STAGES(LINK_STAGES)) u_vb (
          .clk, .rst_n, .in_data(b_link[i][j][l]), .out_data(b_raw));
        sara_bypass_link #(.WIDTH(ACCW), .STAGES(LINK_STAGES)) u_vo (
          .clk, .rst_n, .in_data(b_o[l]), .out_data(o_link[i][j][l]));
        assign b_cell[l] = sext(b_raw);
        if (j == 0) begin : g_pl0
          assign pl[l] = '0;
        end else begin : g_pl
          assign pl[l] = g_i[i].g_j[j-1].r_o[l];
        end
        if (i == 0) begin : g_pt0
          assign pt[l] = '0;
        end else begin : g_pt
          assign pt[l] = g_i[i-1].g_j[j].b_o[l];
        end
      end

      sara_systolic_cell #(.CELL(CELL)) u_cell (
        .clk, .rst_n,
        .op        (op[i][j]),
        .h_byp     (h_byp[i][j]),
        .v_byp     (v_byp[i][j]),
        .peer_left (pl),
        .byp_left  (a_cell),
        .peer_top  (pt),
        .byp_top   (b_cell),
        .right_out (r_o),
        .bottom_out(b_o)
      );
    end
  end

endmodule
