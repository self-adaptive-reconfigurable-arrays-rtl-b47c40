// sara_output_buffer: one slice of the output scratchpad, serving the output
// links of one cell column.
//
// NBANK banks of BANK_BYTES each; a bank holds LANES 32-bit sub-banks (one per
// output lane), each addressed on its own. Any of the NLINK output links may
// write any bank (the slice has a unified address space like the operand
// buffers). A write either stores the value or, with `acc` set, adds it to the
// stored value, which is how stationary dataflows sum the partial results of
// successive reduction tiles. The partition schedule keeps two links from
// writing the same sub-bank in one cycle; the module flags it if they do.
// The host reads one word (all lanes) per cycle with one cycle of latency.
// The accumulate-on-write and the per-lane addressing are this design's
// choices; the paper gives only that a third buffer stores the outputs.
module sara_output_buffer
  import sara_pkg::*;
#(
  parameter int unsigned NLINK      = 32,
  parameter int unsigned NBANK      = 32,
  parameter int unsigned LANES      = 4,
  parameter int unsigned BANK_BYTES = 1024,
  localparam int unsigned DEPTH     = BANK_BYTES / LANES / (ACCW / 8),
  localparam int unsigned AW        = $clog2(NBANK * DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en   [NLINK][LANES],
  input  logic [AW-1:0]   wr_addr [NLINK][LANES],
  input  logic            wr_acc  [NLINK][LANES],
  input  logic [ACCW-1:0] wr_data [NLINK][LANES],
  input  logic [AW-1:0]   host_addr,
  output logic [ACCW-1:0] host_data [LANES],
  output logic            conflict
);

  localparam int unsigned BW = $clog2(NBANK);

  logic [ACCW-1:0] mem [LANES][NBANK*DEPTH];

  always_ff @(posedge clk) begin
    for (int k = 0; k < int'(NLINK); k++)
      for (int l = 0; l < int'(LANES); l++)
        if (wr_en[k][l])
          mem[l][wr_addr[k][l]] <= wr_acc[k][l] ? mem[l][wr_addr[k][l]] + wr_data[k][l]
                                                : wr_data[k][l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(LANES); l++) host_data[l] <= '0;
    end else begin
      for (int l = 0; l < int'(LANES); l++) host_data[l] <= mem[l][host_addr];
    end
  end

  always_comb begin
    conflict = 1'b0;
    for (int l = 0; l < int'(LANES); l++)
      for (int k = 0; k < int'(NLINK); k++)
        for (int k2 = k + 1; k2 < int'(NLINK); k2++)
          if (wr_en[k][l] && wr_en[k2][l] &&
              wr_addr[k][l][AW-1:AW-BW] == wr_addr[k2][l][AW-1:AW-BW]) conflict = 1'b1;
  end

  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n) !conflict)
    else $error("output buffer bank conflict");

endmodule
