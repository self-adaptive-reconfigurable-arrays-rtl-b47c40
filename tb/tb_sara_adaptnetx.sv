// tb_sara_adaptnetx: checks the AdaptNetX core against a reference model of
// the recommender network (embedding lookup, dense hidden layer with ReLU and
// requantisation, dense output layer, argmax) at reduced size: 40 classes,
// 16 hidden nodes, 2 units of 32 multipliers. Random weights are loaded
// through the host port; several queries are run and the class ID and the
// query latency (embedding + HIDDEN/2 + NCLASS/2 issue cycles + pipeline) are
// checked.
module tb_sara_adaptnetx;
  import sara_pkg::*;
  localparam int NC = 40, HID = 16, ED = 8, ER = 64, W = 32, NU = 2;
  localparam int NROWS = HID + NC;
  localparam int RW = $clog2(NROWS > 3*ER ? NROWS : 3*ER);
  localparam int CW = $clog2(NC);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_sel = 0, start = 0, busy, done;
  logic [RW-1:0] wr_row = 0;
  logic [4:0] wr_word = 0;
  logic [63:0] wr_data = 0;
  logic [3:0] hid_shift = 4'd6;
  gemm_dims_t dims = '0;
  logic [CW-1:0] class_id;
  int checks = 0, failures = 0;

  sara_adaptnetx #(.NCLASS(NC), .HIDDEN(HID), .EDIM(ED), .EMB_ROWS(ER), .WIDTH(W), .NUNITS(NU)) dut (.*);

  logic signed [7:0] emb [3*ER][ED];
  logic signed [7:0] wt [NROWS][W];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_class(input int m, input int n, input int k);
    int x[W], h[W], feat[3], best, bv, s;
    feat[0] = m; feat[1] = n; feat[2] = k;
    for (int i = 0; i < W; i++) begin x[i] = 0; h[i] = 0; end
    for (int f = 0; f < 3; f++) begin
      int r;
      r = feat[f] > ER - 1 ? ER - 1 : feat[f];
      for (int e = 0; e < ED; e++) x[f*ED + e] = emb[f*ER + r][e];
    end
    x[3*ED] = 1;
    for (int j = 0; j < HID; j++) begin
      s = 0;
      for (int i = 0; i < W; i++) s += x[i] * wt[j][i];
      s = s >>> hid_shift;
      h[j] = s < 0 ? 0 : (s > 127 ? 127 : s);
    end
    h[HID] = 1;
    best = 0; bv = 0;
    for (int c = 0; c < NC; c++) begin
      s = 0;
      for (int i = 0; i < W; i++) s += h[i] * wt[HID + c][i];
      if (c == 0 || s > bv) begin bv = s; best = c; end
    end
    return best;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (emb[r, e]) emb[r][e] = 8'($urandom_range(0, 255));
    foreach (wt[r, i]) wt[r][i] = 8'($urandom_range(0, 255));
    for (int r = 0; r < 3*ER; r++) begin
      @(negedge clk);
      wr_en = 1; wr_sel = 0; wr_row = RW'(r);
      for (int e = 0; e < ED; e++) wr_data[e*8 +: 8] = emb[r][e];
    end
    for (int r = 0; r < NROWS; r++)
      for (int wd = 0; wd < W/8; wd++) begin
        @(negedge clk);
        wr_en = 1; wr_sel = 1; wr_row = RW'(r); wr_word = 5'(wd);
        for (int b = 0; b < 8; b++) wr_data[b*8 +: 8] = wt[r][wd*8 + b];
      end
    @(negedge clk); wr_en = 0;
    for (int q = 0; q < 12; q++) begin
      int m, n, k, cyc, exp_c;
      m = $urandom_range(1, 80); n = $urandom_range(1, 80); k = $urandom_range(1, 80);
      exp_c = ref_class(m, n, k);
      dims = '{m: DIMW'(m), n: DIMW'(n), k: DIMW'(k)};
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (int'(class_id) != exp_c) begin
        failures++;
        $display("FAIL query %0d (%0d,%0d,%0d): class %0d expected %0d", q, m, n, k, class_id, exp_c);
      end
      // latency: 5 embedding cycles, 1 load, HID/NU + 1 issue, 3 pipeline,
      // 1 load, NC/NU + 1 issue, 3 pipeline, 1 done
      checks++;
      if (cyc != 5 + 1 + HID/NU + 3 + 1 + NC/NU + 3 + 1 + 1) begin
        failures++;
        $display("FAIL latency %0d", cyc);
      end
      if (q == 0) $display("query latency %0d cycles", cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
