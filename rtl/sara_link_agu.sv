// sara_link_agu: address generation for the three links of one systolic cell.
//
// Each cell owns a horizontal input link (A), a vertical input link (B) and an
// output link. Only cells on a partition edge use them: the left column of a
// partition reads A, the top row reads B, the bottom row writes results. From
// the partition controller's broadcast (part_ctl_t), the cell's position inside
// its partition and the GEMM geometry, this unit computes, for each of the
// CELL lanes, whether the lane is active and which scratchpad word it uses.
// All requests that fall outside the matrices are suppressed, so the buffers
// return zeros and partial tiles need no special handling.
//
// Data layouts (this design's choice; the paper says only that the control
// marks the portions of the operand arrays each partition uses):
//   OS  A slice = cell row, lane x: word a_base + k           (k = tau - x)
//       B slice = cell column, lane y: word b_base + k        (k = tau - y)
//   WS  A lane x streams rows of A for reduction index tk*H + x:
//       word a_base + i, row m = ((i/CELL)*PR + pr)*CELL + i%CELL
//       B lane y during LOAD: word b_base + k, k = tk*H + H-1-tau
//   C   bank (m/CELL) mod CELLS of the slice of column n, lane n mod CELL,
//       word ((n/(CELLS*CELL))*ZM + m/(CELLS*CELL))*CELL + m mod CELL
// Combinational; the buffers register the read.
module sara_link_agu
  import sara_pkg::*;
#(
  parameter int unsigned ROW   = 0,
  parameter int unsigned COL   = 0,
  parameter int unsigned CELLS = 32,
  parameter int unsigned CELL  = 4,
  parameter int unsigned A_AW  = 12,   // operand slice address width (one half)
  parameter int unsigned C_AW  = 11,   // output slice address width
  parameter int unsigned C_DEPTH = 64  // words per lane per output bank
) (
  input  array_cfg_t       cfg,
  input  geom_t            geo,
  input  part_ctl_t        ctl,
  output logic             a_req  [CELL],
  output logic [A_AW-1:0]  a_addr [CELL],
  output logic             b_req  [CELL],
  output logic [A_AW-1:0]  b_addr [CELL],
  output logic             o_en   [CELL],
  output logic [C_AW-1:0]  o_addr [CELL],
  output logic             o_acc  [CELL]
);

  localparam int LE = $clog2(CELL);
  localparam int LC = $clog2(CELLS);

  int q, qc, pr, hh, ww;
  logic left_e, top_e, bot_e;

  always_comb begin
    hh     = 1 << cfg.log2h;
    ww     = 1 << cfg.log2w;
    q      = int'(ROW) & (hh - 1);
    qc     = int'(COL) & (ww - 1);
    pr     = int'(ROW) >> cfg.log2h;
    left_e = (qc == 0);
    top_e  = (q == 0);
    bot_e  = (q == hh - 1);
  end

  function automatic int mseq(input int i, input int prow, input int l2pr);
    return ((((i >> LE) << l2pr) + prow) << LE) | (i & (int'(CELL) - 1));
  endfunction

  function automatic int c_word(input int m, input int n, input int zm);
    int bank, word;
    bank = (m >> LE) & (int'(CELLS) - 1);
    word = ((((n >> (LC + LE)) * zm) + (m >> (LC + LE))) << LE) | (m & (int'(CELL) - 1));
    return bank * int'(C_DEPTH) + word;
  endfunction

  always_comb begin
    int x, y, k, m, n, idx, kk, d;
    int mm, nn, kdim, mc;
    mm   = int'(geo.d.m);
    nn   = int'(geo.d.n);
    kdim = int'(geo.d.k);
    mc   = int'(geo.mc);
    {x, y, k, m, n, idx, kk, d} = '0;
    a_req  = '{default: 1'b0};
    a_addr = '{default: '0};
    b_req  = '{default: 1'b0};
    b_addr = '{default: '0};
    o_en   = '{default: 1'b0};
    o_addr = '{default: '0};
    o_acc  = '{default: 1'b0};
    for (int l = 0; l < int'(CELL); l++) begin
      // horizontal (A) lane x
      x = (q << LE) + l;
      a_req[l]  = 1'b0;
      a_addr[l] = '0;
      if (ctl.rd_os) begin
        k = int'(ctl.rd_tau) - x;
        m = int'(ctl.tm) * int'(geo.h) + x;
        a_req[l]  = left_e && k >= 0 && k < kdim && m < mm;
        a_addr[l] = A_AW'(int'(ctl.a_base) + k);
      end else if (ctl.rd_ws) begin
        idx = int'(ctl.rd_tau) - x;
        m   = mseq(idx, pr, int'(geo.l2pr));
        kk  = int'(ctl.tk) * int'(geo.h) + x;
        a_req[l]  = left_e && idx >= 0 && idx < mc && m < mm && kk < kdim;
        a_addr[l] = A_AW'(int'(ctl.a_base) + idx);
      end
      // vertical (B) lane y
      y = (qc << LE) + l;
      n = int'(ctl.tn) * int'(geo.w) + y;
      b_req[l]  = 1'b0;
      b_addr[l] = '0;
      if (ctl.rd_os) begin
        k = int'(ctl.rd_tau) - y;
        b_req[l]  = top_e && k >= 0 && k < kdim && n < nn;
        b_addr[l] = A_AW'(int'(ctl.b_base) + k);
      end else if (ctl.rd_load) begin
        kk = int'(ctl.tk) * int'(geo.h) + int'(geo.h) - 1 - int'(ctl.rd_tau);
        b_req[l]  = top_e && kk >= 0 && kk < kdim && n < nn;
        b_addr[l] = A_AW'(int'(ctl.b_base) + kk);
      end
      // output lane y
      n = int'(ctl.wr_tn) * int'(geo.w) + y;
      o_en[l]   = 1'b0;
      o_addr[l] = '0;
      o_acc[l]  = ctl.wr_acc;
      if (ctl.wr_os) begin
        d = int'(ctl.wr_tau);
        m = int'(ctl.wr_tm) * int'(geo.h) + int'(geo.h) - 1 - d;
        o_en[l]   = bot_e && d >= 0 && d < int'(geo.h) && m < mm && n < nn;
        o_addr[l] = C_AW'(c_word(m, n, int'(geo.zm)));
      end else if (ctl.wr_ws) begin
        idx = int'(ctl.wr_tau) - int'(geo.h) - y;
        m   = mseq(idx, pr, int'(geo.l2pr));
        o_en[l]   = bot_e && idx >= 0 && idx < mc && m < mm && n < nn;
        o_addr[l] = C_AW'(c_word(m, n, int'(geo.zm)));
      end
    end
  end

endmodule
