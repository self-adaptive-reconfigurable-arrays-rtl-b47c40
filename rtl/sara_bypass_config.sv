// sara_bypass_config: the bypass configuration register (setBypassMuxes).
//
// A configuration names the partition shape, 2^log2h x 2^log2w systolic cells,
// with partitions tiling the whole CELLS x CELLS array. On `load` the shape is
// decoded into one select bit per internal cell edge and direction and stored
// in a register whose bits drive the cell edge multiplexers directly:
//   h_byp[i][j] = 1 when cell (i,j) is the left-most cell of a partition,
//   v_byp[i][j] = 1 when cell (i,j) is the top-most cell of a partition.
// Cells in column 0 / row 0 always take their SRAM link, so only the
// 2 x CELLS x (CELLS-1) internal selects are stored (1984 bits for 32 x 32
// cells). The paper quotes a 3968-bit configuration vector without listing its
// fields; this design stores one bit per cell edge per direction, which gives
// half that count. The register holds its value for the whole GEMM and
// updates one cycle after `load`.
module sara_bypass_config
  import sara_pkg::*;
#(
  parameter int unsigned CELLS = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  array_cfg_t cfg_in,
  output array_cfg_t cfg,              // configuration currently applied
  output logic       h_byp [CELLS][CELLS],
  output logic       v_byp [CELLS][CELLS]
);

  localparam int unsigned NB = CELLS * (CELLS - 1);

  logic [NB-1:0] h_bits_q, v_bits_q;
  logic [NB-1:0] h_bits_d, v_bits_d;
  array_cfg_t    cfg_q;

  // Decode: boundary b of row r sits between cells b and b+1 (cell index b+1).
  always_comb begin
    for (int r = 0; r < int'(CELLS); r++) begin
      for (int b = 0; b < int'(CELLS) - 1; b++) begin
        h_bits_d[r*(CELLS-1)+b] = (((b + 1) & ((1 << cfg_in.log2w) - 1)) == 0);
        v_bits_d[r*(CELLS-1)+b] = (((b + 1) & ((1 << cfg_in.log2h) - 1)) == 0);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_bits_q <= '0;            // reset: one monolithic array
      v_bits_q <= '0;
      cfg_q    <= '{df: DF_OS, log2h: 3'($clog2(CELLS)), log2w: 3'($clog2(CELLS))};
    end else if (load) begin
      h_bits_q <= h_bits_d;
      v_bits_q <= v_bits_d;
      cfg_q    <= cfg_in;
    end
  end

  assign cfg = cfg_q;

  // Cell (i,j): horizontal select uses row i, boundary j-1; vertical select
  // uses column j, boundary i-1.
  for (genvar i = 0; i < CELLS; i++) begin : g_i
    for (genvar j = 0; j < CELLS; j++) begin : g_j
      if (j == 0) begin : g_h0
        assign h_byp[i][j] = 1'b1;
      end else begin : g_h
        assign h_byp[i][j] = h_bits_q[i*(CELLS-1) + j - 1];
      end
      if (i == 0) begin : g_v0
        assign v_byp[i][j] = 1'b1;
      end else begin : g_v
        assign v_byp[i][j] = v_bits_q[j*(CELLS-1) + i - 1];
      end
    end
  end

endmodule
