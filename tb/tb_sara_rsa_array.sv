// tb_sara_rsa_array: the reconfigurable array at reduced size (4 x 4 cells of
// 2 x 2 MACs, 3-stage links) against a cycle-level reference model. Every
// cycle each cell gets a random operation and every link random data; the
// bypass selects are set from a random partition shape that changes every
// 200 cycles. The model holds the state of every MAC, the three link
// pipelines of every cell and the edge multiplexers, and all output links are
// compared each cycle. This covers peer-to-peer forwarding across cell
// boundaries inside a partition, bypass-link entry at partition edges, the
// 3-cycle link latency and draining through the output links.
module tb_sara_rsa_array;
  import sara_pkg::*;
  localparam int C = 4, E = 2, S = 3, N = C * E;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mac_op_e op [C][C];
  logic h_byp [C][C], v_byp [C][C];
  logic [DW-1:0] a_link [C][C][E], b_link [C][C][E];
  logic [ACCW-1:0] o_link [C][C][E];
  int checks = 0, failures = 0;
  sara_rsa_array #(.CELLS(C), .CELL(E), .LINK_STAGES(S)) dut (.*);

  // model state
  logic [DW-1:0]   mh [N][N], ms [N][N];
  logic [ACCW-1:0] mv [N][N], ma [N][N];
  logic [DW-1:0]   pa [C][C][E][S], pb [C][C][E][S];
  logic [ACCW-1:0] po [C][C][E][S];
  int n_peer = 0, n_byp = 0, n_drain = 0;

  function automatic logic [ACCW-1:0] bot(input int r, input int c);
    return (op[r/E][c/E] == OP_DRAIN) ? ma[r][c] : mv[r][c];
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l2h, l2w;
    foreach (mh[r, c]) begin mh[r][c] = 0; ms[r][c] = 0; mv[r][c] = 0; ma[r][c] = 0; end
    foreach (pa[i, j, l, s]) begin pa[i][j][l][s] = 0; pb[i][j][l][s] = 0; po[i][j][l][s] = 0; end
    foreach (op[i, j]) begin op[i][j] = OP_IDLE; h_byp[i][j] = 1; v_byp[i][j] = 1; end
    foreach (a_link[i, j, l]) begin a_link[i][j][l] = 0; b_link[i][j][l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    l2h = 0; l2w = 0;
    for (int t = 0; t < 3000; t++) begin
      logic [DW-1:0]   lin [N][N];
      logic [ACCW-1:0] tin [N][N];
      if (t % 200 == 0) begin l2h = $urandom_range(0, 2); l2w = $urandom_range(0, 2); end
      foreach (op[i, j]) begin
        op[i][j] = mac_op_e'($urandom_range(0, 5));
        h_byp[i][j] = (j % (1 << l2w)) == 0;
        v_byp[i][j] = (i % (1 << l2h)) == 0;
      end
      foreach (a_link[i, j, l]) begin a_link[i][j][l] = 8'($urandom); b_link[i][j][l] = 8'($urandom); end
      #1;
      // compare output links
      foreach (o_link[i, j, l]) begin
        checks++;
        if (o_link[i][j][l] !== po[i][j][l][S-1]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d o_link[%0d][%0d][%0d] %h expected %h", t, i, j, l, o_link[i][j][l], po[i][j][l][S-1]);
        end
      end
      // model: MAC inputs
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          int ci, cj;
          ci = r / E; cj = c / E;
          if (c % E == 0) lin[r][c] = h_byp[ci][cj] ? pa[ci][cj][r%E][S-1] : (c == 0 ? 8'd0 : mh[r][c-1]);
          else            lin[r][c] = mh[r][c-1];
          if (r % E == 0) tin[r][c] = v_byp[ci][cj] ? sext(pb[ci][cj][c%E][S-1]) : (r == 0 ? 32'd0 : bot(r-1, c));
          else            tin[r][c] = bot(r-1, c);
          if (c % E == 0 && c > 0 && op[ci][cj] != OP_IDLE) begin if (h_byp[ci][cj]) n_byp++; else n_peer++; end
          if (op[ci][cj] == OP_DRAIN) n_drain++;
        end
      @(posedge clk);
      // link pipelines (the output link samples the cell's bottom edge)
      for (int i = 0; i < C; i++)
        for (int j = 0; j < C; j++)
          for (int l = 0; l < E; l++) begin
            for (int s = S - 1; s > 0; s--) begin
              pa[i][j][l][s] = pa[i][j][l][s-1];
              pb[i][j][l][s] = pb[i][j][l][s-1];
              po[i][j][l][s] = po[i][j][l][s-1];
            end
            pa[i][j][l][0] = a_link[i][j][l];
            pb[i][j][l][0] = b_link[i][j][l];
            po[i][j][l][0] = bot(i*E + E - 1, j*E + l);
          end
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          unique case (op[r/E][c/E])
            OP_CLEAR:  begin ma[r][c] = 0; mv[r][c] = 0; mh[r][c] = 0; end
            OP_OS_MAC: begin ma[r][c] = ma[r][c] + ACCW'($signed(lin[r][c]) * $signed(tin[r][c][7:0])); mh[r][c] = lin[r][c]; mv[r][c] = sext(tin[r][c][7:0]); end
            OP_DRAIN:  ma[r][c] = tin[r][c];
            OP_LOAD:   begin ms[r][c] = tin[r][c][7:0]; mv[r][c] = sext(tin[r][c][7:0]); end
            OP_ST_MAC: begin mh[r][c] = lin[r][c]; mv[r][c] = tin[r][c] + ACCW'($signed(lin[r][c]) * $signed(ms[r][c])); end
            default: ;
          endcase
      @(negedge clk);
    end
    checks++;
    if (n_peer == 0 || n_byp == 0 || n_drain == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
