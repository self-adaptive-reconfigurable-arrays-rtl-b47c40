// tb_sara_bypass_config: loads every partition shape of the 32 x 32 cell
// array (power-of-two heights and widths from 1 to 32 cells) and checks all
// horizontal and vertical bypass selects: a cell takes its own bypass link
// when it is on the left (top) edge of its partition and its neighbour's data
// otherwise. Also checks the reset state (one monolithic partition), that the
// configuration holds while load is low, and the one-cycle load latency.
module tb_sara_bypass_config;
  import sara_pkg::*;
  localparam int C = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0;
  array_cfg_t cfg_in = '0, cfg;
  logic h_byp [C][C], v_byp [C][C];
  int checks = 0, failures = 0;
  sara_bypass_config #(.CELLS(C)) dut (.*);

  task automatic check_sel(input int l2h, input int l2w);
    int bad;
    bad = 0;
    for (int i = 0; i < C; i++)
      for (int j = 0; j < C; j++) begin
        if (h_byp[i][j] != ((j % (1 << l2w)) == 0)) bad++;
        if (v_byp[i][j] != ((i % (1 << l2h)) == 0)) bad++;
      end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL partition %0dx%0d: %0d wrong selects", 1 << l2h, 1 << l2w, bad);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_sel(5, 5);
    for (int df = 0; df < 3; df++)
      for (int a = 0; a <= 5; a++)
        for (int b = 0; b <= 5; b++) begin
          cfg_in = '{df: dataflow_e'(df), log2h: 3'(a), log2w: 3'(b)};
          load = 1;
          checks++;
          @(negedge clk);
          load = 0;
          if (cfg != cfg_in) begin failures++; $display("FAIL cfg not applied"); end
          check_sel(a, b);
          cfg_in = '{df: DF_OS, log2h: 3'd0, log2w: 3'd0};
          @(negedge clk);
          checks++;
          if (cfg.log2h != 3'(a) || cfg.log2w != 3'(b)) begin failures++; $display("FAIL cfg changed without load"); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
