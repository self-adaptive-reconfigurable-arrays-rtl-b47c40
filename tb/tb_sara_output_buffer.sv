// tb_sara_output_buffer: one output buffer slice at paper size (32 banks of
// 1 KB, 4 lanes of 32-bit words). Random sets of output links write or
// accumulate into distinct banks each cycle; the contents are compared with a
// model through the host read port (one-cycle latency). Also checks that two
// links writing one bank raise the conflict flag.
module tb_sara_output_buffer;
  import sara_pkg::*;
  localparam int NL = 32, NB = 32, LN = 4, BB = 1024, D = BB / LN / 4, AW = $clog2(NB * D);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en [NL][LN], wr_acc [NL][LN], conflict;
  logic [AW-1:0] wr_addr [NL][LN];
  logic [ACCW-1:0] wr_data [NL][LN];
  logic [AW-1:0] host_addr = 0;
  logic [ACCW-1:0] host_data [LN];
  int checks = 0, failures = 0;
  sara_output_buffer #(.NLINK(NL), .NBANK(NB), .LANES(LN), .BANK_BYTES(BB)) dut (.*);
  logic [ACCW-1:0] img [LN][NB*D];
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    foreach (wr_en[k, l]) begin wr_en[k][l] = 0; wr_acc[k][l] = 0; wr_addr[k][l] = 0; wr_data[k][l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initialise every word with plain writes, link k -> bank k
    for (int w = 0; w < D; w++) begin
      for (int k = 0; k < NL; k++)
        for (int l = 0; l < LN; l++) begin
          wr_en[k][l] = 1; wr_acc[k][l] = 0; wr_addr[k][l] = AW'(k * D + w);
          wr_data[k][l] = $urandom; img[l][k * D + w] = wr_data[k][l];
        end
      @(negedge clk);
    end
    for (int t = 0; t < 2000; t++) begin
      int perm [NB];
      foreach (perm[b]) perm[b] = b;
      perm.shuffle();
      for (int k = 0; k < NL; k++)
        for (int l = 0; l < LN; l++) begin
          int a;
          a = perm[k] * D + $urandom_range(0, D - 1);
          wr_en[k][l] = 1'($urandom); wr_acc[k][l] = 1'($urandom);
          wr_addr[k][l] = AW'(a); wr_data[k][l] = $urandom;
          if (wr_en[k][l]) img[l][a] = wr_acc[k][l] ? img[l][a] + wr_data[k][l] : wr_data[k][l];
        end
      #1;
      checks++; if (conflict) failures++;
      @(negedge clk);
    end
    foreach (wr_en[k, l]) wr_en[k][l] = 0;
    for (int a = 0; a < NB * D; a++) begin
      host_addr = AW'(a);
      @(negedge clk);
      for (int l = 0; l < LN; l++) begin
        checks++;
        if (host_data[l] !== img[l][a]) begin
          failures++;
          if (failures < 10) $display("FAIL word %0d lane %0d: %h expected %h", a, l, host_data[l], img[l][a]);
        end
      end
    end
    wr_en[0][2] = 1; wr_addr[0][2] = AW'(5 * D + 1);
    wr_en[7][2] = 1; wr_addr[7][2] = AW'(5 * D + 9);
    #1;
    checks++; if (!conflict) begin failures++; $display("FAIL conflict not flagged"); end
    wr_en[0][2] = 0; wr_en[7][2] = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
