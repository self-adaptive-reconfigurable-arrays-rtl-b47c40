// sara_tb_body.svh: shared body of the SAGAR end-to-end testbenches.
//
// Included inside a testbench module that has declared the localparams
// T_CELLS, T_CELL, T_BANK, T_NCLASS, T_HIDDEN, T_EMB, T_W and instantiated
// sara_top as `dut` on the signals declared here. It provides:
//   * an independent model of the scratchpad data layouts (written from the
//     layout rules, not from the RTL address units),
//   * run_gemm(): load random A and B, run one GEMM (forced configuration or
//     AdaptNetX-chosen), read C back and compare with a reference product,
//   * counters for every mechanism the design has.

  import sara_pkg::*;

  localparam int LCt = $clog2(T_CELLS);
  localparam int A_AWt = $clog2(T_CELLS * T_BANK / T_CELL / 2);
  localparam int C_DEPTHt = T_BANK / T_CELL / 4;
  localparam int C_AWt = $clog2(T_CELLS * C_DEPTHt);
  localparam int CWt = $clog2(T_NCLASS);
  localparam int ARWt = $clog2((T_HIDDEN + T_NCLASS) > 3 * T_EMB ? (T_HIDDEN + T_NCLASS) : 3 * T_EMB);
  localparam int SWt = (LCt > 0) ? LCt : 1;
  localparam int MAXD = 160;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            a_wr_en = 0, b_wr_en = 0, buf_swap = 0;
  logic [SWt-1:0]  a_wr_slice = 0, b_wr_slice = 0, c_rd_slice = 0;
  logic [A_AWt-1:0] a_wr_addr = 0, b_wr_addr = 0;
  logic [7:0]      a_wr_data [T_CELL];
  logic [7:0]      b_wr_data [T_CELL];
  logic [C_AWt-1:0] c_rd_addr = 0;
  logic [31:0]     c_rd_data [T_CELL];
  logic            anx_wr_en = 0, anx_wr_sel = 0;
  logic [ARWt-1:0] anx_wr_row = 0;
  logic [4:0]      anx_wr_word = 0;
  logic [63:0]     anx_wr_data = 0;
  logic [3:0]      anx_hid_shift = 4'd0;
  logic            ctab_wr_en = 0;
  logic [CWt-1:0]  ctab_wr_cls = 0;
  array_cfg_t      ctab_wr_cfg = '0;
  logic            start = 0, cfg_force = 0;
  gemm_dims_t      dims = '0;
  array_cfg_t      cfg_forced = '0, cfg_used;
  logic            busy, done, conflict_seen;
  logic [CWt-1:0]  class_id;
  logic [31:0]     infer_cycles, run_cycles;
  logic [47:0]     rd_requests, rd_accesses;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_os = 0, n_ws = 0, n_is = 0, n_mono = 0, n_dist = 0, n_mixed = 0;
  int n_infer = 0, n_forced = 0, n_collate = 0, n_partial = 0, n_kacc = 0;
  int n_swap = 0, n_switch = 0;
  array_cfg_t last_cfg = '0;
  bit have_last = 0;

  logic signed [7:0]  A [MAXD][MAXD];
  logic signed [7:0]  B [MAXD][MAXD];
  logic signed [31:0] Cref [MAXD][MAXD];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- layout model ----------------
  // Location of operand element (r, c) of the array-side matrices X (rows x K,
  // horizontal stream) and Y (K x cols, vertical stream).
  task automatic loc_x(input array_cfg_t cfg, input int r, input int k, input int M, input int K,
                       output int slice, output int lane, output int addr);
    int h, H, PR, mc, pr, q, i, tm;
    h = 1 << cfg.log2h; H = h * T_CELL; PR = T_CELLS / h;
    if (cfg.df == DF_OS) begin
      slice = (r / T_CELL) % T_CELLS;
      lane  = r % T_CELL;
      tm    = r / H;
      addr  = (tm / PR) * K + k;
    end else begin
      mc    = ((((M + T_CELL - 1) / T_CELL) + PR - 1) / PR) * T_CELL;
      pr    = (r / T_CELL) % PR;
      q     = (k / T_CELL) % h;
      slice = pr * h + q;
      lane  = k % T_CELL;
      i     = ((r / T_CELL) / PR) * T_CELL + r % T_CELL;
      addr  = (k / H) * mc + i;
    end
  endtask

  task automatic loc_y(input array_cfg_t cfg, input int k, input int c, input int K,
                       output int slice, output int lane, output int addr);
    int w, W, PC, v, h, H, kt;
    w = 1 << cfg.log2w; W = w * T_CELL; PC = T_CELLS / w;
    h = 1 << cfg.log2h; H = h * T_CELL;
    slice = (c / T_CELL) % T_CELLS;
    lane  = c % T_CELL;
    v     = (c / W) / PC;
    if (cfg.df == DF_OS) addr = v * K + k;
    else begin
      kt   = (K + H - 1) / H;
      addr = v * kt * H + k;
    end
  endtask

  task automatic loc_z(input int r, input int c, input int M, output int slice, output int lane,
                       output int addr);
    int zm, bank, word, ar;
    ar    = T_CELLS * T_CELL;
    zm    = (M + ar - 1) / ar;
    slice = (c / T_CELL) % T_CELLS;
    lane  = c % T_CELL;
    bank  = (r / T_CELL) % T_CELLS;
    word  = ((c / ar) * zm + r / ar) * T_CELL + r % T_CELL;
    addr  = bank * C_DEPTHt + word;
  endtask

  // Buffer images (one word of T_CELL lanes per address), written to the DUT.
  logic [7:0] ximg [T_CELLS][1 << A_AWt][T_CELL];
  logic [7:0] yimg [T_CELLS][1 << A_AWt][T_CELL];
  bit         xused [T_CELLS][1 << A_AWt];
  bit         yused [T_CELLS][1 << A_AWt];

  task automatic load_buffers(input array_cfg_t cfg, input int M, input int N, input int K);
    int s, l, a, ma, na;
    ma = (cfg.df == DF_IS) ? N : M;   // array-side rows and columns
    na = (cfg.df == DF_IS) ? M : N;
    foreach (xused[i, j]) begin xused[i][j] = 0; yused[i][j] = 0; end
    foreach (ximg[i, j, k]) begin ximg[i][j][k] = 0; yimg[i][j][k] = 0; end
    // array-side X (M x K) and Y (K x N)
    for (int r = 0; r < ma; r++)
      for (int k = 0; k < K; k++) begin
        loc_x(cfg, r, k, ma, K, s, l, a);
        ximg[s][a][l] = (cfg.df == DF_IS) ? B[k][r] : A[r][k];
        xused[s][a] = 1;
      end
    for (int k = 0; k < K; k++)
      for (int c = 0; c < na; c++) begin
        loc_y(cfg, k, c, K, s, l, a);
        yimg[s][a][l] = (cfg.df == DF_IS) ? A[c][k] : B[k][c];
        yused[s][a] = 1;
      end
    for (int si = 0; si < T_CELLS; si++)
      for (int ai = 0; ai < (1 << A_AWt); ai++) begin
        if (xused[si][ai]) begin
          @(negedge clk);
          a_wr_en = 1; a_wr_slice = SWt'(si); a_wr_addr = A_AWt'(ai);
          for (int li = 0; li < T_CELL; li++) a_wr_data[li] = ximg[si][ai][li];
        end
        if (yused[si][ai]) begin
          if (!xused[si][ai]) @(negedge clk);
          b_wr_en = 1; b_wr_slice = SWt'(si); b_wr_addr = A_AWt'(ai);
          for (int li = 0; li < T_CELL; li++) b_wr_data[li] = yimg[si][ai][li];
        end
        if (xused[si][ai] || yused[si][ai]) begin
          @(negedge clk);
          a_wr_en = 0; b_wr_en = 0;
        end
      end
    @(negedge clk);
    buf_swap = 1;
    @(negedge clk);
    buf_swap = 0;
    n_swap++;
  endtask

  function automatic int expected_cycles(input array_cfg_t cfg, input int M, input int N, input int K);
    int h, w, H, W, PR, PC, su, sv, kt, mc, fl;
    if (cfg.df == DF_IS) begin int t; t = M; M = N; N = t; end
    h = 1 << cfg.log2h; w = 1 << cfg.log2w; H = h * T_CELL; W = w * T_CELL;
    PR = T_CELLS / h; PC = T_CELLS / w;
    su = (((M + H - 1) / H) + PR - 1) / PR;
    sv = (((N + W - 1) / W) + PC - 1) / PC;
    kt = (K + H - 1) / H;
    mc = ((((M + T_CELL - 1) / T_CELL) + PR - 1) / PR) * T_CELL;
    fl = 1 + 3 + 3 + 1;   // flush: read latency + output link latency + 1
    if (cfg.df == DF_OS) return su * sv * (1 + (K + H + W - 2) + H + fl);
    else                 return sv * kt * (H + (mc + H + W) + fl);
  endfunction

  // Run one GEMM. force_cfg=0 lets AdaptNetX choose (exp_cfg is then what the
  // class table maps the expected class to).
  task automatic run_gemm(input int M, input int N, input int K, input bit force_cfg,
                          input array_cfg_t cfg, input int exp_class);
    int s, l, a, errs, cyc0;
    array_cfg_t c;
    for (int r = 0; r < M; r++) for (int k = 0; k < K; k++) A[r][k] = 8'($urandom_range(0, 255));
    for (int k = 0; k < K; k++) for (int cc = 0; cc < N; cc++) B[k][cc] = 8'($urandom_range(0, 255));
    for (int r = 0; r < M; r++)
      for (int cc = 0; cc < N; cc++) begin
        Cref[r][cc] = 0;
        for (int k = 0; k < K; k++) Cref[r][cc] += 32'(A[r][k]) * 32'(B[k][cc]);
      end
    load_buffers(cfg, M, N, K);
    @(negedge clk);
    dims = '{m: DIMW'(M), n: DIMW'(N), k: DIMW'(K)};
    cfg_force  = force_cfg;
    cfg_forced = cfg;
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    c = cfg_used;
    check(c == cfg, $sformatf("configuration used %p, expected %p", c, cfg));
    if (!force_cfg) begin
      check(int'(class_id) == exp_class, $sformatf("class %0d, expected %0d", class_id, exp_class));
      check(infer_cycles > 0, "inference took no cycles");
      n_infer++;
    end else n_forced++;
    // run length must match the schedule (+1 cycle in which the sequencer sees the controllers idle)
    check(int'(run_cycles) == expected_cycles(cfg, M, N, K) + 1,
          $sformatf("run cycles %0d, expected %0d", run_cycles, expected_cycles(cfg, M, N, K) + 1));
    check(!conflict_seen, "bank conflict");
    // read back C
    errs = 0;
    for (int r = 0; r < M; r++)
      for (int cc = 0; cc < N; cc++) begin
        logic [31:0] got;
        if (cfg.df == DF_IS) loc_z(cc, r, N, s, l, a);
        else                 loc_z(r, cc, M, s, l, a);
        c_rd_slice = SWt'(s); c_rd_addr = C_AWt'(a);
        @(negedge clk);
        got = c_rd_data[l];
        if (got !== Cref[r][cc]) begin
          errs++;
          if (errs < 5) $display("  C[%0d][%0d] = %0d, expected %0d", r, cc, $signed(got), Cref[r][cc]);
        end
        checks++;
      end
    failures += errs;
    $display("GEMM %0dx%0dx%0d df=%0d part=%0dx%0d cells: %0d errors, run %0d cycles, reads %0d req / %0d bank",
             M, N, K, cfg.df, 1 << cfg.log2h, 1 << cfg.log2w, errs, run_cycles, rd_requests, rd_accesses);
    // mechanism accounting
    case (cfg.df) DF_OS: n_os++; DF_WS: n_ws++; default: n_is++; endcase
    if (cfg.log2h == 3'(LCt) && cfg.log2w == 3'(LCt)) n_mono++;
    else if (cfg.log2h == 0 && cfg.log2w == 0) n_dist++;
    else n_mixed++;
    if (rd_requests > rd_accesses) n_collate++;
    if (M % T_CELL != 0 || N % T_CELL != 0 || K % T_CELL != 0) n_partial++;
    if (cfg.df != DF_OS && K > (T_CELL << cfg.log2h)) n_kacc++;
    if (have_last && cfg != last_cfg) n_switch++;
    last_cfg = cfg; have_last = 1;
  endtask

  // AdaptNetX programming for the end-to-end check: zero embeddings and
  // weights except the bias weight (input index T_HIDDEN of layer 2) of
  // class `cls`, so the network recommends `cls` for any workload.
  task automatic program_anx(input int cls, input array_cfg_t cfg);
    for (int r = 0; r < 3 * T_EMB; r++) begin
      @(negedge clk); anx_wr_en = 1; anx_wr_sel = 0; anx_wr_row = ARWt'(r); anx_wr_data = '0;
    end
    for (int r = 0; r < T_HIDDEN + T_NCLASS; r++)
      for (int wd = 0; wd < T_W / 8; wd++) begin
        @(negedge clk);
        anx_wr_en = 1; anx_wr_sel = 1; anx_wr_row = ARWt'(r); anx_wr_word = 5'(wd);
        anx_wr_data = (r == T_HIDDEN + cls && wd == T_HIDDEN / 8) ? (64'd100 << (8 * (T_HIDDEN % 8))) : '0;
      end
    @(negedge clk); anx_wr_en = 0;
    ctab_wr_en = 1; ctab_wr_cls = CWt'(cls); ctab_wr_cfg = cfg;
    @(negedge clk); ctab_wr_en = 0;
  endtask

  task automatic report_mechanisms();
    $display("mechanisms: OS=%0d WS=%0d IS=%0d mono=%0d dist=%0d mixed=%0d infer=%0d forced=%0d collate=%0d partial=%0d kacc=%0d swap=%0d switch=%0d",
             n_os, n_ws, n_is, n_mono, n_dist, n_mixed, n_infer, n_forced, n_collate, n_partial, n_kacc, n_swap, n_switch);
  endtask
