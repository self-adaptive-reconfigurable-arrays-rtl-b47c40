// sara_mac: one multiply-accumulate unit of the reconfigurable systolic array.
//
// Operands arrive on the left (8-bit) and top (32-bit) ports and are passed to
// the right and bottom neighbours one cycle later over peer-to-peer links, as in
// a conventional systolic array. Internal registers let the same unit run the
// three systolic dataflows named in the paper:
//   * output stationary (OP_OS_MAC): acc += left * top[7:0]; the left operand
//     goes right, the top operand goes down. OP_DRAIN then turns the column of
//     accumulators into a shift register: bottom_out shows acc (combinationally)
//     and acc takes top_in, so a partition of R rows empties in R cycles.
//   * weight / input stationary (OP_LOAD, OP_ST_MAC): OP_LOAD shifts a value
//     down the column into the stationary register; OP_ST_MAC adds
//     left * stationary to the partial sum arriving from the top and registers
//     it for the MAC below. WS and IS share this datapath.
// The op encoding, the combinational drain path and the operand widths are this
// design's choices; the paper gives only the unit's purpose and its modes.
module sara_mac
  import sara_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  mac_op_e         op,
  input  logic [DW-1:0]   left_in,
  input  logic [ACCW-1:0] top_in,
  output logic [DW-1:0]   right_out,
  output logic [ACCW-1:0] bottom_out
);

  logic [DW-1:0]   h_q;
  logic [ACCW-1:0] v_q;
  logic [ACCW-1:0] acc_q;
  logic [DW-1:0]   stat_q;
  logic signed [2*DW-1:0] prod_os, prod_st;

  assign prod_os = $signed(left_in) * $signed(top_in[DW-1:0]);
  assign prod_st = $signed(left_in) * $signed(stat_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_q    <= '0;
      v_q    <= '0;
      acc_q  <= '0;
      stat_q <= '0;
    end else begin
      unique case (op)
        OP_CLEAR: begin
          acc_q <= '0;
          v_q   <= '0;
          h_q   <= '0;
        end
        OP_OS_MAC: begin
          h_q   <= left_in;
          v_q   <= sext(top_in[DW-1:0]);
          acc_q <= acc_q + {{(ACCW-2*DW){prod_os[2*DW-1]}}, prod_os};
        end
        OP_DRAIN: acc_q <= top_in;
        OP_LOAD: begin
          stat_q <= top_in[DW-1:0];
          v_q    <= sext(top_in[DW-1:0]);
        end
        OP_ST_MAC: begin
          h_q <= left_in;
          v_q <= top_in + {{(ACCW-2*DW){prod_st[2*DW-1]}}, prod_st};
        end
        default: ;
      endcase
    end
  end

  assign right_out  = h_q;
  assign bottom_out = (op == OP_DRAIN) ? acc_q : v_q;

endmodule
