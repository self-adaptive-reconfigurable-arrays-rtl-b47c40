// sara_bypass_link: a pipelined bypass wire between the scratchpad and a
// systolic cell (or from a cell back to the output buffer).
//
// The paper's place-and-route finds that a repeated wire can cross 8 systolic
// cells in one 1 GHz cycle, so a flop is placed after every 8 cells. With 32
// cells per row the longest link needs 3 flops. This design gives every link
// the same depth, STAGES, whatever its length, so that all partitions see the
// same latency and can run in lockstep (needed for read collation); that
// equalisation is this design's choice. A valid bit travels with the data.
module sara_bypass_link #(
  parameter int unsigned WIDTH  = 32,
  parameter int unsigned STAGES = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] in_data,
  output logic [WIDTH-1:0] out_data
);

  if (STAGES == 0) begin : g_wire
    assign out_data  = in_data;
  end else begin : g_pipe
    logic [WIDTH-1:0] d_q [STAGES];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int s = 0; s < STAGES; s++) d_q[s] <= '0;
      end else begin
        d_q[0] <= in_data;
        for (int s = 1; s < STAGES; s++) begin
          d_q[s] <= d_q[s-1];
        end
      end
    end
    assign out_data  = d_q[STAGES-1];
  end

endmodule
