// tb_sara_link_agu: address units of four cells at different positions of an
// 8 x 8 cell array (4 x 4 MACs per cell), for random partition shapes, GEMM
// sizes and schedule states. For each lane the expected request and word are
// derived from the element the schedule needs at that instant: in OS the
// left partition column reads A[m][k] and the top row B[k][n] with
// k = tau - lane offset (systolic skew); in the stationary mode the top row
// loads B rows in reverse order and the left column streams A rows in the
// interleaved partition-row order; the bottom row writes C in the bank
// layout of the output buffer. Requests outside the matrices must be off.
module tb_sara_link_agu;
  import sara_pkg::*;
  localparam int C = 8, E = 4, LC = 3, LE = 2, AAW = 12, CAW = 11, CD = 64;
  localparam int NP = 4;
  localparam int PR_ [NP] = '{0, 1, 5, 7};
  localparam int PC_ [NP] = '{0, 2, 0, 3};
  logic clk = 0;
  always #5 clk = ~clk;
  array_cfg_t cfg = '0;
  gemm_dims_t d = '0;
  geom_t geo;
  part_ctl_t ctl = '0;
  assign geo = derive(cfg, d, LC, LE);
  logic a_req [NP][E], b_req [NP][E], o_en [NP][E], o_acc [NP][E];
  logic [AAW-1:0] a_addr [NP][E], b_addr [NP][E];
  logic [CAW-1:0] o_addr [NP][E];
  int checks = 0, failures = 0;
  int n_a = 0, n_b = 0, n_o = 0;
  for (genvar p = 0; p < NP; p++) begin : g_p
    sara_link_agu #(.ROW(PR_[p]), .COL(PC_[p]), .CELLS(C), .CELL(E), .A_AW(AAW), .C_AW(CAW), .C_DEPTH(CD)) u_agu (
      .cfg, .geo, .ctl, .a_req(a_req[p]), .a_addr(a_addr[p]), .b_req(b_req[p]), .b_addr(b_addr[p]),
      .o_en(o_en[p]), .o_addr(o_addr[p]), .o_acc(o_acc[p]));
  end

  function automatic int cword(input int m, input int n, input int zm);
    return ((m / E) % C) * CD + (((n / (C * E)) * zm + m / (C * E)) * E + m % E);
  endfunction

  task automatic chk(input string what, input int p, input int l, input logic got_v, input int got_a,
                     input bit exp_v, input int exp_a);
    checks++;
    if (got_v !== exp_v || (exp_v && got_a != exp_a)) begin
      failures++;
      if (failures < 10) $display("FAIL %s cell %0d lane %0d: %0d/%0d expected %0d/%0d", what, p, l, got_v, got_a, exp_v, exp_a);
    end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 20000; t++) begin
      int h, w, H, W, M, N, K, PR, mcv, zm;
      cfg = '{df: ($urandom_range(0, 1) == 0) ? DF_OS : DF_WS, log2h: 3'($urandom_range(0, 3)), log2w: 3'($urandom_range(0, 3))};
      M = $urandom_range(1, 100); N = $urandom_range(1, 100); K = $urandom_range(1, 100);
      d = '{m: DIMW'(M), n: DIMW'(N), k: DIMW'(K)};
      h = 1 << cfg.log2h; w = 1 << cfg.log2w; H = h * E; W = w * E; PR = C / h;
      mcv = ((((M + E - 1) / E) + PR - 1) / PR) * E;
      zm = (M + C * E - 1) / (C * E);
      ctl = '0;
      ctl.rd_os   = (cfg.df == DF_OS);
      ctl.rd_load = (cfg.df != DF_OS) && 1'($urandom);
      ctl.rd_ws   = (cfg.df != DF_OS) && !ctl.rd_load;
      ctl.rd_tau  = TAUW'($urandom_range(0, 150) - 5);
      ctl.tm = DIMW'($urandom_range(0, 3)); ctl.tn = DIMW'($urandom_range(0, 3)); ctl.tk = DIMW'($urandom_range(0, 3));
      ctl.a_base = 20'($urandom_range(0, 500)); ctl.b_base = 20'($urandom_range(0, 500));
      ctl.wr_os = (cfg.df == DF_OS) && 1'($urandom);
      ctl.wr_ws = (cfg.df != DF_OS) && 1'($urandom);
      ctl.wr_tau = TAUW'($urandom_range(0, 150) - 5);
      ctl.wr_tm = DIMW'($urandom_range(0, 3)); ctl.wr_tn = DIMW'($urandom_range(0, 3));
      ctl.wr_acc = 1'($urandom);
      #1;
      for (int p = 0; p < NP; p++) begin
        int q, qc, pr, x, y, k, m, n, i, kk, dd;
        bit left, top, bottom, ev;
        q = PR_[p] % h; qc = PC_[p] % w; pr = PR_[p] / h;
        left = (qc == 0); top = (q == 0); bottom = (q == h - 1);
        for (int l = 0; l < E; l++) begin
          x = q * E + l; y = qc * E + l;
          // A
          if (ctl.rd_os) begin
            k = int'(ctl.rd_tau) - x; m = int'(ctl.tm) * H + x;
            ev = left && k >= 0 && k < K && m < M;
            chk("A os", p, l, a_req[p][l], int'(a_addr[p][l]), ev, (int'(ctl.a_base) + k) % (1 << AAW));
          end else if (ctl.rd_ws) begin
            i = int'(ctl.rd_tau) - x;
            m = ((i / E) * PR + pr) * E + i % E;
            kk = int'(ctl.tk) * H + x;
            ev = left && i >= 0 && i < mcv && m < M && kk < K;
            chk("A ws", p, l, a_req[p][l], int'(a_addr[p][l]), ev, (int'(ctl.a_base) + i) % (1 << AAW));
          end else chk("A idle", p, l, a_req[p][l], 0, 0, 0);
          if (a_req[p][l]) n_a++;
          // B
          n = int'(ctl.tn) * W + y;
          if (ctl.rd_os) begin
            k = int'(ctl.rd_tau) - y;
            ev = top && k >= 0 && k < K && n < N;
            chk("B os", p, l, b_req[p][l], int'(b_addr[p][l]), ev, (int'(ctl.b_base) + k) % (1 << AAW));
          end else if (ctl.rd_load) begin
            kk = int'(ctl.tk) * H + H - 1 - int'(ctl.rd_tau);
            ev = top && kk >= 0 && kk < K && n < N;
            chk("B load", p, l, b_req[p][l], int'(b_addr[p][l]), ev, (int'(ctl.b_base) + kk) % (1 << AAW));
          end else chk("B idle", p, l, b_req[p][l], 0, 0, 0);
          if (b_req[p][l]) n_b++;
          // C
          n = int'(ctl.wr_tn) * W + y;
          if (ctl.wr_os) begin
            dd = int'(ctl.wr_tau); m = int'(ctl.wr_tm) * H + H - 1 - dd;
            ev = bottom && dd >= 0 && dd < H && m < M && n < N;
            chk("C os", p, l, o_en[p][l], int'(o_addr[p][l]), ev, ev ? cword(m, n, zm) : 0);
          end else if (ctl.wr_ws) begin
            i = int'(ctl.wr_tau) - H - y;
            m = ((i / E) * PR + pr) * E + i % E;
            ev = bottom && i >= 0 && i < mcv && m < M && n < N;
            chk("C ws", p, l, o_en[p][l], int'(o_addr[p][l]), ev, ev ? cword(m, n, zm) : 0);
          end else chk("C idle", p, l, o_en[p][l], 0, 0, 0);
          if (o_en[p][l]) begin
            n_o++;
            checks++;
            if (o_acc[p][l] !== ctl.wr_acc) failures++;
          end
        end
      end
      @(negedge clk);
    end
    checks++;
    if (n_a == 0 || n_b == 0 || n_o == 0) begin failures++; $display("FAIL coverage %0d %0d %0d", n_a, n_b, n_o); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
