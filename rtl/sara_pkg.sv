// sara_pkg: types and constants shared by the SAGAR reconfigurable systolic
// array (RSA), its scratchpad buffers, its partition controllers and the
// AdaptNetX recommendation core.
//
// The array is a CELLS x CELLS grid of systolic cells, each a CELL x CELL grid
// of MAC units (32 x 32 cells of 4 x 4 MACs = 16384 MACs, as in the paper).
// Operand precision (8-bit signed) and accumulator width (32 bits) are this
// design's choice; the paper does not state them.
package sara_pkg;

  localparam int unsigned DW   = 8;    // operand width
  localparam int unsigned ACCW = 32;   // accumulator / partial-sum width
  localparam int unsigned DIMW = 16;   // width of a GEMM dimension M, N, K
  localparam int unsigned TAUW = 18;   // signed schedule counter width

  // Operation broadcast by a partition controller to every MAC of its partition.
  typedef enum logic [2:0] {
    OP_IDLE   = 3'd0,  // hold all state
    OP_CLEAR  = 3'd1,  // zero accumulator and vertical register
    OP_OS_MAC = 3'd2,  // output stationary: acc += left * top, forward both
    OP_DRAIN  = 3'd3,  // output stationary: shift accumulators down one row
    OP_LOAD   = 3'd4,  // stationary operand: shift the loaded value down one row
    OP_ST_MAC = 3'd5   // stationary operand: psum_out = psum_in + left * stationary
  } mac_op_e;

  // Dataflow chosen for a GEMM. DF_IS runs on the stationary-operand datapath
  // with the roles of the operand matrices exchanged.
  typedef enum logic [1:0] {
    DF_OS = 2'd0,
    DF_WS = 2'd1,
    DF_IS = 2'd2
  } dataflow_e;

  // One array configuration: partitions of (2^log2h x 2^log2w) cells tile the
  // whole array, and all run the same dataflow.
  typedef struct packed {
    dataflow_e  df;
    logic [2:0] log2h;
    logic [2:0] log2w;
  } array_cfg_t;

  typedef struct packed {
    logic [DIMW-1:0] m;
    logic [DIMW-1:0] n;
    logic [DIMW-1:0] k;
  } gemm_dims_t;

  // Schedule information a partition controller broadcasts to its cells.
  // rd_* fields are in the read-issue frame, wr_* fields are delayed to the
  // frame in which results reach the output buffer.
  typedef struct packed {
    mac_op_e          op;        // already delayed to the cell frame
    logic             rd_os;     // OS compute phase: stream A and B
    logic             rd_load;   // stationary load phase: stream B downwards
    logic             rd_ws;     // stationary compute: stream A
    logic signed [TAUW-1:0] rd_tau;
    logic [DIMW-1:0]  tm;        // row tile (OS)
    logic [DIMW-1:0]  tn;        // column tile
    logic [DIMW-1:0]  tk;        // reduction tile (WS)
    logic [DIMW+3:0]  a_base;    // base word of A stream for this step
    logic [DIMW+3:0]  b_base;    // base word of B stream for this step
    logic             wr_os;     // OS drain results on output links
    logic             wr_ws;     // stationary-mode psums on output links
    logic signed [TAUW-1:0] wr_tau;
    logic [DIMW-1:0]  wr_tm;
    logic [DIMW-1:0]  wr_tn;
    logic             wr_acc;    // accumulate into output buffer
  } part_ctl_t;

  // Geometry of a GEMM on a configuration, shared by all controllers and
  // address units. Partition sizes are powers of two, so the divisions below
  // reduce to shifts. lc = log2(cells per array side), le = log2(MACs per cell
  // side).
  typedef struct packed {
    logic [DIMW-1:0] h;     // MAC rows of one partition
    logic [DIMW-1:0] w;     // MAC columns of one partition
    logic [3:0]      l2h;   // log2(h)
    logic [3:0]      l2w;   // log2(w)
    logic [3:0]      l2pr;  // log2(partition rows)
    logic [3:0]      l2pc;  // log2(partition columns)
    logic [DIMW-1:0] su;    // OS: row-tile steps per partition
    logic [DIMW-1:0] sv;    // column-tile steps per partition
    logic [DIMW-1:0] kt;    // stationary: reduction tiles
    logic [DIMW-1:0] mc;    // stationary: rows streamed per partition row
    logic [DIMW-1:0] zm;    // output layout: ceil(M / array rows)
    gemm_dims_t      d;     // dimensions as seen by the array
  } geom_t;

  function automatic geom_t derive(input array_cfg_t cfg, input gemm_dims_t d,
                                   input int unsigned lc, input int unsigned le);
    geom_t g;
    int unsigned h, w, pr, pc, mt, nt, l2h, l2w;
    l2h = int'(cfg.log2h) + le;
    l2w = int'(cfg.log2w) + le;
    h   = 1 << l2h;
    w   = 1 << l2w;
    pr  = 1 << (lc - int'(cfg.log2h));
    pc  = 1 << (lc - int'(cfg.log2w));
    mt  = (int'(d.m) + h - 1) >> l2h;
    nt  = (int'(d.n) + w - 1) >> l2w;
    g.h    = DIMW'(h);
    g.w    = DIMW'(w);
    g.l2h  = 4'(l2h);
    g.l2w  = 4'(l2w);
    g.l2pr = 4'(lc - int'(cfg.log2h));
    g.l2pc = 4'(lc - int'(cfg.log2w));
    g.su   = DIMW'((mt + pr - 1) >> g.l2pr);
    g.sv   = DIMW'((nt + pc - 1) >> g.l2pc);
    g.kt   = DIMW'((int'(d.k) + h - 1) >> l2h);
    g.mc   = DIMW'(((((int'(d.m) + (1 << le) - 1) >> le) + pr - 1) >> g.l2pr) << le);
    g.zm   = DIMW'((int'(d.m) + (1 << (lc + le)) - 1) >> (lc + le));
    g.d    = d;
    return g;
  endfunction

  function automatic logic [ACCW-1:0] sext(input logic [DW-1:0] v);
    return {{(ACCW-DW){v[DW-1]}}, v};
  endfunction

endpackage
