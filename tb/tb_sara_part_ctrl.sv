// tb_sara_part_ctrl: the partition controller of the top-left cell of a
// 32 x 32 cell array, for random GEMM sizes, dataflows and partition shapes.
// Checks that the controller stays busy for exactly the schedule length
// (OS per tile step: 1 clear + K+H+W-2 MAC + H drain + 8 flush cycles;
// stationary per step: H load + MC+H+W MAC + 8 flush cycles), that the
// broadcast operation counts match the schedule, and that a
// controller of a cell that is not a partition corner ignores start.
module tb_sara_part_ctrl;
  import sara_pkg::*;
  localparam int C = 32, E = 4, LC = 5, LE = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, busy1;
  array_cfg_t cfg = '0;
  geom_t geo;
  gemm_dims_t d = '0;
  part_ctl_t ctl, ctl1;
  int checks = 0, failures = 0;
  assign geo = derive(cfg, d, LC, LE);
  sara_part_ctrl #(.ROW(0), .COL(0), .LINK_STAGES(3)) dut (.clk, .rst_n, .start, .cfg, .geo, .ctl, .busy);
  sara_part_ctrl #(.ROW(0), .COL(1), .LINK_STAGES(3)) dut1 (.clk, .rst_n, .start, .cfg, .geo, .ctl(ctl1), .busy(busy1));
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < 30; q++) begin
      int M, N, K, h, w, H, W, PR, PC, su, sv, kt, mc, steps, exp_len, len, cnt [6];
      M = $urandom_range(1, 300); N = $urandom_range(1, 300); K = $urandom_range(1, 200);
      cfg = '{df: (q % 2 == 0) ? DF_OS : DF_WS, log2h: 3'($urandom_range(0, 5)), log2w: 3'($urandom_range(1, 5))};
      d = '{m: DIMW'(M), n: DIMW'(N), k: DIMW'(K)};
      h = 1 << cfg.log2h; w = 1 << cfg.log2w; H = h * E; W = w * E; PR = C / h; PC = C / w;
      su = (((M + H - 1) / H) + PR - 1) / PR;
      sv = (((N + W - 1) / W) + PC - 1) / PC;
      kt = (K + H - 1) / H;
      mc = ((((M + E - 1) / E) + PR - 1) / PR) * E;
      steps = (cfg.df == DF_OS) ? su * sv : sv * kt;
      exp_len = (cfg.df == DF_OS) ? steps * (1 + K + H + W - 2 + H + 8) : steps * (H + mc + H + W + 8);
      foreach (cnt[i]) cnt[i] = 0;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      len = 0;
      while (busy) begin
        len++;
        if (busy1) begin failures++; $display("FAIL non-corner controller started"); end
        if (ctl.op != OP_IDLE) cnt[int'(ctl.op)]++;
        @(negedge clk);
      end
      repeat (6) begin
        if (ctl.op != OP_IDLE) cnt[int'(ctl.op)]++;
        @(negedge clk);
      end
      checks++;
      if (cfg.df == DF_OS ? (cnt[1] != steps || cnt[2] != steps * (K + H + W - 2) || cnt[3] != steps * H)
                          : (cnt[4] != steps * H || cnt[5] != steps * (mc + H + W))) begin
        failures++;
        $display("FAIL q=%0d operation counts %0d %0d %0d %0d %0d", q, cnt[1], cnt[2], cnt[3], cnt[4], cnt[5]);
      end
      checks++;
      if (len != exp_len) begin failures++; $display("FAIL q=%0d df=%0d len %0d expected %0d", q, cfg.df, len, exp_len); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
