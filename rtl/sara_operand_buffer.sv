// sara_operand_buffer: one slice of an operand scratchpad (A or B).
//
// SAGAR backs each operand with 1024 SRAM banks of 1 KB; this module is the
// part of that buffer serving one cell row (A) or one cell column (B): NBANK
// banks feeding the NLINK links of that row/column (one direct link to the
// edge cell and 31 bypass links). Each bank is LANES byte-wide sub-banks, one
// per MAC lane of a link, each addressed on its own so that the skew of the
// systolic wavefront is produced by addressing rather than by skew registers.
//
// Unified addressing: a lane address covers the whole slice (bank = upper
// bits), so any link may read any word, and no operand is replicated across
// banks. When several links read the same word in the same cycle, one bank
// access serves all of them (read collation: the paper's implicit multicast).
// Two links reading different words of one bank in one cycle is a bank
// conflict; the partition schedule avoids it, and the module flags it.
//
// Double buffering: every bank is split into two halves. Links read the half
// selected by rd_half; the host port writes the other half; `swap` exchanges
// them. Read latency is one cycle; a lane that issues no request returns 0.
// Half-splitting of each bank and the collation counters are this design's
// choices; the paper gives bank count, bank size and double buffering.
module sara_operand_buffer
  import sara_pkg::*;
#(
  parameter int unsigned NLINK      = 32,
  parameter int unsigned NBANK      = 32,
  parameter int unsigned LANES      = 4,
  parameter int unsigned BANK_BYTES = 1024,
  localparam int unsigned HDEPTH    = BANK_BYTES / LANES / 2,   // words per lane per bank half
  localparam int unsigned AW        = $clog2(NBANK * HDEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  output logic          rd_half,
  // host write port (into the half not being read)
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data [LANES],
  // link read ports
  input  logic          rd_req  [NLINK][LANES],
  input  logic [AW-1:0] rd_addr [NLINK][LANES],
  output logic [DW-1:0] rd_data [NLINK][LANES],
  // statistics for the current cycle
  output logic [$clog2(NLINK*LANES+1)-1:0] n_req,
  output logic [$clog2(NBANK*LANES+1)-1:0] n_access,
  output logic          conflict
);

  localparam int unsigned BW = $clog2(NBANK);
  localparam int unsigned WW = AW - BW;

  logic [DW-1:0] mem [LANES][2*NBANK*HDEPTH];
  logic          half_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) half_q <= 1'b0;
    else if (swap) half_q <= ~half_q;
  end
  assign rd_half = half_q;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < int'(LANES); l++) mem[l][{~half_q, wr_addr}] <= wr_data[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(NLINK); k++)
        for (int l = 0; l < int'(LANES); l++) rd_data[k][l] <= '0;
    end else begin
      for (int k = 0; k < int'(NLINK); k++)
        for (int l = 0; l < int'(LANES); l++)
          rd_data[k][l] <= rd_req[k][l] ? mem[l][{half_q, rd_addr[k][l]}] : '0;
    end
  end

  // Collation and conflict accounting: per lane and bank, the first requesting
  // link defines the word the bank reads; every other request to that bank must
  // be for the same word.
  always_comb begin
    n_req    = '0;
    n_access = '0;
    conflict = 1'b0;
    for (int l = 0; l < int'(LANES); l++) begin
      for (int b = 0; b < int'(NBANK); b++) begin
        logic          hit;
        logic [WW-1:0] word;
        hit  = 1'b0;
        word = '0;
        for (int k = 0; k < int'(NLINK); k++) begin
          if (rd_req[k][l] && rd_addr[k][l][AW-1:WW] == BW'(b)) begin
            if (!hit) word = rd_addr[k][l][WW-1:0];
            else if (rd_addr[k][l][WW-1:0] != word) conflict = 1'b1;
            hit = 1'b1;
          end
        end
        n_access = n_access + hit;
      end
      for (int k = 0; k < int'(NLINK); k++) n_req = n_req + rd_req[k][l];
    end
  end

  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n) !conflict)
    else $error("operand buffer bank conflict");

endmodule
