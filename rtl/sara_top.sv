// sara_top: SAGAR, a Self-Adaptive Reconfigurable Array for GEMM.
//
// SAGAR pairs a reconfigurable systolic array (RSA) of 32 x 32 systolic cells
// of 4 x 4 MACs (16384 MACs, 32.8 TOPS at 1 GHz in the paper's 28 nm layout)
// with AdaptNetX, a small core that runs the AdaptNet recommender. For each
// GEMM C[M x N] = A[M x K] * B[K x N] the top runs the paper's control flow:
//   1. recNetInference: AdaptNetX maps (M, N, K) to a class ID, and the class
//      table maps the ID to a configuration (partition shape, dataflow);
//   2. setBypassMuxes: the configuration is written into the bypass
//      configuration register, whose bits drive the cell edge multiplexers;
//   3. partitionWorkload / 4. systolicController: the controller at the
//      top-left cell of every partition starts; all partitions run their
//      share of the output tiles in parallel and in lockstep.
// The host may also force a configuration (cfg_force), skipping step 1.
//
// Memories: the A scratchpad has one slice per cell row and the B scratchpad
// one per cell column, each 32 banks of 1 KB (1024 banks per buffer, as in the
// paper), double buffered; the output buffer has one slice per cell column.
// The host fills A and B through a_wr_* / b_wr_* (into the halves not being
// read, then swap) and reads C through c_rd_* (one cycle latency). With
// DF_IS the array computes C^T = B^T * A^T: the host stores B^T in the A
// buffer and A^T in the B buffer and reads C^T, and the array sees (N, M, K).
// The data layouts are those of sara_link_agu.
//
// Counters: inference and run cycles of the last GEMM, and scratchpad reads
// requested by links versus bank accesses made (their difference is the reads
// saved by collation). conflict_seen latches any bank conflict.
module sara_top
  import sara_pkg::*;
#(
  parameter int unsigned CELLS       = 32,
  parameter int unsigned CELL        = 4,
  parameter int unsigned LINK_STAGES = 3,
  parameter int unsigned BANK_BYTES  = 1024,
  parameter int unsigned NCLASS      = 858,
  parameter int unsigned HIDDEN      = 128,
  parameter int unsigned EMB_ROWS    = 10240,
  parameter int unsigned ANX_WIDTH   = 256,
  localparam int unsigned LC   = $clog2(CELLS),
  localparam int unsigned LE   = $clog2(CELL),
  localparam int unsigned SW   = (LC > 0) ? LC : 1,
  localparam int unsigned A_AW = $clog2(CELLS * BANK_BYTES / CELL / 2),
  localparam int unsigned C_DEPTH = BANK_BYTES / CELL / (ACCW / 8),
  localparam int unsigned C_AW = $clog2(CELLS * C_DEPTH),
  localparam int unsigned CW   = $clog2(NCLASS),
  localparam int unsigned ARW  = $clog2((HIDDEN + NCLASS) > 3 * EMB_ROWS ? (HIDDEN + NCLASS) : 3 * EMB_ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // operand scratchpads (host side)
  input  logic            a_wr_en,
  input  logic [SW-1:0]   a_wr_slice,
  input  logic [A_AW-1:0] a_wr_addr,
  input  logic [DW-1:0]   a_wr_data [CELL],
  input  logic            b_wr_en,
  input  logic [SW-1:0]   b_wr_slice,
  input  logic [A_AW-1:0] b_wr_addr,
  input  logic [DW-1:0]   b_wr_data [CELL],
  input  logic            buf_swap,
  // output buffer (host side)
  input  logic [SW-1:0]   c_rd_slice,
  input  logic [C_AW-1:0] c_rd_addr,
  output logic [ACCW-1:0] c_rd_data [CELL],
  // AdaptNetX and class table loading
  input  logic            anx_wr_en,
  input  logic            anx_wr_sel,
  input  logic [ARW-1:0]  anx_wr_row,
  input  logic [4:0]      anx_wr_word,
  input  logic [63:0]     anx_wr_data,
  input  logic [3:0]      anx_hid_shift,
  input  logic            ctab_wr_en,
  input  logic [CW-1:0]   ctab_wr_cls,
  input  array_cfg_t      ctab_wr_cfg,
  // GEMM command
  input  logic            start,
  input  gemm_dims_t      dims,
  input  logic            cfg_force,
  input  array_cfg_t      cfg_forced,
  output logic            busy,
  output logic            done,
  output array_cfg_t      cfg_used,
  output logic [CW-1:0]   class_id,
  output logic [31:0]     infer_cycles,
  output logic [31:0]     run_cycles,
  output logic [47:0]     rd_requests,
  output logic [47:0]     rd_accesses,
  output logic            conflict_seen
);

  // ------------------------------------------------------------------
  // Sequencer
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {T_IDLE, T_INFER, T_LOOKUP, T_LOOKUP2, T_SETMUX, T_START, T_RUN, T_DONE}
    tstate_e;
  tstate_e    ts;
  gemm_dims_t dims_q;
  array_cfg_t cfg_sel;
  array_cfg_t cfg_tab;
  array_cfg_t cfg_app;
  logic       anx_start, anx_busy, anx_done;
  logic [CW-1:0] anx_cls;
  logic       mux_load, ctrl_start;
  logic       any_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts           <= T_IDLE;
      dims_q       <= '0;
      cfg_sel      <= '0;
      class_id     <= '0;
      infer_cycles <= '0;
      run_cycles   <= '0;
      done         <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (ts)
        T_IDLE: if (start) begin
          dims_q       <= dims;
          infer_cycles <= '0;
          run_cycles   <= '0;
          if (cfg_force) begin
            cfg_sel <= cfg_forced;
            ts      <= T_SETMUX;
          end else begin
            ts <= T_INFER;
          end
        end
        T_INFER: begin
          infer_cycles <= infer_cycles + 1;
          if (anx_done) begin
            class_id <= anx_cls;
            ts       <= T_LOOKUP;
          end
        end
        T_LOOKUP:  ts <= T_LOOKUP2;            // class table read
        T_LOOKUP2: begin
          cfg_sel <= cfg_tab;
          ts      <= T_SETMUX;
        end
        T_SETMUX: ts <= T_START;               // bypass register written
        T_START:  ts <= T_RUN;
        T_RUN: begin
          run_cycles <= run_cycles + 1;
          if (!any_busy) ts <= T_DONE;
        end
        T_DONE: begin
          done <= 1'b1;
          ts   <= T_IDLE;
        end
        default: ts <= T_IDLE;
      endcase
    end
  end

  assign anx_start  = (ts == T_IDLE) && start && !cfg_force;
  assign mux_load   = (ts == T_SETMUX);
  assign ctrl_start = (ts == T_START);
  assign busy       = (ts != T_IDLE);
  assign cfg_used   = cfg_app;

  sara_adaptnetx #(
    .NCLASS(NCLASS), .HIDDEN(HIDDEN), .EMB_ROWS(EMB_ROWS), .WIDTH(ANX_WIDTH)
  ) u_anx (
    .clk, .rst_n,
    .wr_en   (anx_wr_en),
    .wr_sel  (anx_wr_sel),
    .wr_row  (anx_wr_row),
    .wr_word (anx_wr_word),
    .wr_data (anx_wr_data),
    .hid_shift(anx_hid_shift),
    .start   (anx_start),
    .dims    (dims),
    .busy    (anx_busy),
    .done    (anx_done),
    .class_id(anx_cls)
  );

  sara_config_table #(.NCLASS(NCLASS), .LC(LC)) u_ctab (
    .clk, .rst_n,
    .wr_en (ctab_wr_en),
    .wr_cls(ctab_wr_cls),
    .wr_cfg(ctab_wr_cfg),
    .cls   (class_id),
    .cfg   (cfg_tab)
  );

  logic h_byp [CELLS][CELLS];
  logic v_byp [CELLS][CELLS];
  sara_bypass_config #(.CELLS(CELLS)) u_bcfg (
    .clk, .rst_n,
    .load  (mux_load),
    .cfg_in(cfg_sel),
    .cfg   (cfg_app),
    .h_byp,
    .v_byp
  );

  // Geometry seen by the array (IS exchanges the roles of A and B).
  gemm_dims_t dims_arr;
  geom_t      geo;
  assign dims_arr = (cfg_app.df == DF_IS) ? '{m: dims_q.n, n: dims_q.m, k: dims_q.k} : dims_q;
  assign geo      = derive(cfg_app, dims_arr, LC, LE);

  // ------------------------------------------------------------------
  // Array, per-cell controllers and address units
  // ------------------------------------------------------------------
  mac_op_e         op_cell [CELLS][CELLS];
  logic            a_req   [CELLS][CELLS][CELL];   // [cell row][link][lane]
  logic [A_AW-1:0] a_addr  [CELLS][CELLS][CELL];
  logic [DW-1:0]   a_data  [CELLS][CELLS][CELL];
  logic            b_req   [CELLS][CELLS][CELL];   // [cell column][link][lane]
  logic [A_AW-1:0] b_addr  [CELLS][CELLS][CELL];
  logic [DW-1:0]   b_data  [CELLS][CELLS][CELL];
  logic [DW-1:0]   b_link  [CELLS][CELLS][CELL];   // [row][col][lane]
  logic [ACCW-1:0] o_link  [CELLS][CELLS][CELL];   // [row][col][lane]
  logic            o_en    [CELLS][CELLS][CELL];   // [cell column][link][lane]
  logic [C_AW-1:0] o_addr  [CELLS][CELLS][CELL];
  logic            o_acc   [CELLS][CELLS][CELL];
  logic [ACCW-1:0] o_data  [CELLS][CELLS][CELL];
  logic            busy_cell [CELLS*CELLS];

  for (genvar i = 0; i < CELLS; i++) begin : g_r
    for (genvar j = 0; j < CELLS; j++) begin : g_c
      part_ctl_t ctl_own, ctl_c;
      logic      is_left, is_top;

      sara_part_ctrl #(.ROW(i), .COL(j), .LINK_STAGES(LINK_STAGES)) u_ctrl (
        .clk, .rst_n,
        .start(ctrl_start),
        .cfg  (cfg_app),
        .geo,
        .ctl  (ctl_own),
        .busy (busy_cell[i*CELLS+j])
      );

      // A partition's schedule reaches its cells along the rows from the
      // partition's left column, and down that column from its top-left cell.
      assign is_left = h_byp[i][j];
      assign is_top  = v_byp[i][j];
      if (j > 0 && i > 0) begin : g_in
        assign ctl_c = !is_left ? g_r[i].g_c[j-1].ctl_c : (!is_top ? g_r[i-1].g_c[j].ctl_c : ctl_own);
      end else if (j > 0) begin : g_row0
        assign ctl_c = !is_left ? g_r[i].g_c[j-1].ctl_c : ctl_own;
      end else if (i > 0) begin : g_col0
        assign ctl_c = !is_top ? g_r[i-1].g_c[j].ctl_c : ctl_own;
      end else begin : g_org
        assign ctl_c = ctl_own;
      end
      assign op_cell[i][j] = ctl_c.op;

      sara_link_agu #(
        .ROW(i), .COL(j), .CELLS(CELLS), .CELL(CELL),
        .A_AW(A_AW), .C_AW(C_AW), .C_DEPTH(C_DEPTH)
      ) u_agu (
        .cfg   (cfg_app),
        .geo,
        .ctl   (ctl_c),
        .a_req (a_req[i][j]),
        .a_addr(a_addr[i][j]),
        .b_req (b_req[j][i]),
        .b_addr(b_addr[j][i]),
        .o_en  (o_en[j][i]),
        .o_addr(o_addr[j][i]),
        .o_acc (o_acc[j][i])
      );

      for (genvar l = 0; l < CELL; l++) begin : g_l
        assign b_link[i][j][l] = b_data[j][i][l];
        assign o_data[j][i][l] = o_link[i][j][l];
      end
    end
  end

  always_comb begin
    any_busy = 1'b0;
    for (int c = 0; c < int'(CELLS * CELLS); c++) any_busy |= busy_cell[c];
  end

  sara_rsa_array #(.CELLS(CELLS), .CELL(CELL), .LINK_STAGES(LINK_STAGES)) u_array (
    .clk, .rst_n,
    .op    (op_cell),
    .h_byp,
    .v_byp,
    .a_link(a_data),
    .b_link(b_link),
    .o_link(o_link)
  );

  // ------------------------------------------------------------------
  // Scratchpads
  // ------------------------------------------------------------------
  localparam int unsigned NRW = $clog2(CELLS * CELL + 1);
  localparam int unsigned NAW = $clog2(CELLS * CELL + 1);
  logic [NRW-1:0] a_nreq [CELLS], b_nreq [CELLS];
  logic [NAW-1:0] a_nacc [CELLS], b_nacc [CELLS];
  logic           a_conf [CELLS], b_conf [CELLS], o_conf [CELLS];
  logic           a_half [CELLS], b_half [CELLS];
  logic [ACCW-1:0] c_host [CELLS][CELL];

  for (genvar s = 0; s < CELLS; s++) begin : g_buf
    sara_operand_buffer #(.NLINK(CELLS), .NBANK(CELLS), .LANES(CELL), .BANK_BYTES(BANK_BYTES)) u_abuf (
      .clk, .rst_n,
      .swap    (buf_swap),
      .rd_half (a_half[s]),
      .wr_en   (a_wr_en && a_wr_slice == SW'(s)),
      .wr_addr (a_wr_addr),
      .wr_data (a_wr_data),
      .rd_req  (a_req[s]),
      .rd_addr (a_addr[s]),
      .rd_data (a_data[s]),
      .n_req   (a_nreq[s]),
      .n_access(a_nacc[s]),
      .conflict(a_conf[s])
    );
    sara_operand_buffer #(.NLINK(CELLS), .NBANK(CELLS), .LANES(CELL), .BANK_BYTES(BANK_BYTES)) u_bbuf (
      .clk, .rst_n,
      .swap    (buf_swap),
      .rd_half (b_half[s]),
      .wr_en   (b_wr_en && b_wr_slice == SW'(s)),
      .wr_addr (b_wr_addr),
      .wr_data (b_wr_data),
      .rd_req  (b_req[s]),
      .rd_addr (b_addr[s]),
      .rd_data (b_data[s]),
      .n_req   (b_nreq[s]),
      .n_access(b_nacc[s]),
      .conflict(b_conf[s])
    );
    sara_output_buffer #(.NLINK(CELLS), .NBANK(CELLS), .LANES(CELL), .BANK_BYTES(BANK_BYTES)) u_obuf (
      .clk, .rst_n,
      .wr_en    (o_en[s]),
      .wr_addr  (o_addr[s]),
      .wr_acc   (o_acc[s]),
      .wr_data  (o_data[s]),
      .host_addr(c_rd_addr),
      .host_data(c_host[s]),
      .conflict (o_conf[s])
    );
  end

  logic [SW-1:0] c_slice_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c_slice_q <= '0;
    else        c_slice_q <= c_rd_slice;
  end
  assign c_rd_data = c_host[c_slice_q];

  // Statistics
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_requests   <= '0;
      rd_accesses   <= '0;
      conflict_seen <= 1'b0;
    end else begin
      logic [47:0] nr, na;
      logic        cf;
      nr = '0;
      na = '0;
      cf = 1'b0;
      for (int s = 0; s < int'(CELLS); s++) begin
        nr += 48'(a_nreq[s]) + 48'(b_nreq[s]);
        na += 48'(a_nacc[s]) + 48'(b_nacc[s]);
        cf |= a_conf[s] | b_conf[s] | o_conf[s];
      end
      if (start && ts == T_IDLE) begin
        rd_requests <= '0;
        rd_accesses <= '0;
      end else begin
        rd_requests <= rd_requests + nr;
        rd_accesses <= rd_accesses + na;
      end
      conflict_seen <= conflict_seen | cf;
    end
  end

endmodule
