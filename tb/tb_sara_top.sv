// tb_sara_top: end-to-end test of SAGAR at reduced size.
//
// A 4 x 4 grid of 4 x 4-MAC systolic cells (16 x 16 MACs), a 16-class
// AdaptNetX with 16 hidden nodes and 32-wide 1-D units. Runs GEMMs in all three
// dataflows, monolithic, fully distributed and mixed partitionings, with
// dimensions that are not multiples of the tile sizes, one GEMM whose
// configuration comes from AdaptNetX inference, and checks every output, the
// configuration applied, the run length against the schedule, and that each
// mechanism was exercised at least once.
module tb_sara_top;
  localparam int T_CELLS = 4, T_CELL = 4, T_BANK = 1024;
  localparam int T_NCLASS = 16, T_HIDDEN = 16, T_EMB = 64, T_W = 32;

  `include "sara_tb_body.svh"

  sara_top #(
    .CELLS(T_CELLS), .CELL(T_CELL), .BANK_BYTES(T_BANK),
    .NCLASS(T_NCLASS), .HIDDEN(T_HIDDEN), .EMB_ROWS(T_EMB), .ANX_WIDTH(T_W)
  ) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (a_wr_data[i]) begin a_wr_data[i] = 0; b_wr_data[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // forced configurations: OS monolithic, OS distributed, OS mixed
    run_gemm(16, 16, 16, 1, '{df: DF_OS, log2h: 3'd2, log2w: 3'd2}, 0);
    run_gemm(20, 13, 9,  1, '{df: DF_OS, log2h: 3'd0, log2w: 3'd0}, 0);
    run_gemm(37, 22, 11, 1, '{df: DF_OS, log2h: 3'd1, log2w: 3'd0}, 0);
    // weight stationary: monolithic with K > H, distributed, mixed
    run_gemm(24, 16, 40, 1, '{df: DF_WS, log2h: 3'd2, log2w: 3'd2}, 0);
    run_gemm(18, 21, 7,  1, '{df: DF_WS, log2h: 3'd0, log2w: 3'd0}, 0);
    run_gemm(30, 9, 19,  1, '{df: DF_WS, log2h: 3'd0, log2w: 3'd1}, 0);
    // input stationary
    run_gemm(12, 26, 14, 1, '{df: DF_IS, log2h: 3'd1, log2w: 3'd1}, 0);
    // self-configured: AdaptNetX recommends class 5 -> WS, 2x1-cell partitions
    program_anx(5, '{df: DF_WS, log2h: 3'd1, log2w: 3'd0});
    run_gemm(33, 17, 21, 0, '{df: DF_WS, log2h: 3'd1, log2w: 3'd0}, 5);
    report_mechanisms();
    check(n_os > 0 && n_ws > 0 && n_is > 0, "all dataflows run");
    check(n_mono > 0 && n_dist > 0 && n_mixed > 0, "monolithic, distributed and mixed partitionings run");
    check(n_infer > 0 && n_forced > 0, "inferred and forced configurations");
    check(n_collate > 0, "read collation occurred");
    check(n_partial > 0, "partial tiles");
    check(n_kacc > 0, "stationary accumulation over reduction tiles");
    check(n_swap > 0 && n_switch > 0, "buffer swap and reconfiguration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
