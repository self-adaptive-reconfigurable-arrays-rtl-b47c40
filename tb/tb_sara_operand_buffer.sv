// tb_sara_operand_buffer: one operand buffer slice at paper size (32 banks of
// 1 KB, 4 byte lanes, double buffered). Fills the fill half through the host
// port, swaps, then issues random link reads (many links reading the same
// word of a bank, as partitions sharing an operand do) and checks the read
// data one cycle later, the request and bank-access counts (collation: equal
// requests to one bank cost one access), the conflict flag, and that host
// writes after a swap do not disturb the half being read.
module tb_sara_operand_buffer;
  import sara_pkg::*;
  localparam int NL = 32, NB = 32, LN = 4, BB = 1024, HD = BB / LN / 2, AW = $clog2(NB * HD);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic swap = 0, rd_half, wr_en = 0, conflict;
  logic [AW-1:0] wr_addr = 0;
  logic [DW-1:0] wr_data [LN];
  logic rd_req [NL][LN];
  logic [AW-1:0] rd_addr [NL][LN];
  logic [DW-1:0] rd_data [NL][LN];
  logic [$clog2(NL*LN+1)-1:0] n_req;
  logic [$clog2(NB*LN+1)-1:0] n_access;
  int checks = 0, failures = 0;
  sara_operand_buffer #(.NLINK(NL), .NBANK(NB), .LANES(LN), .BANK_BYTES(BB)) dut (.*);
  logic [DW-1:0] img [2][LN][NB*HD];
  int fill;

  task automatic fill_half(input int h);
    for (int a = 0; a < NB * HD; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a);
      for (int l = 0; l < LN; l++) begin wr_data[l] = 8'($urandom); img[h][l][a] = wr_data[l]; end
    end
    @(negedge clk); wr_en = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    foreach (rd_req[k, l]) begin rd_req[k][l] = 0; rd_addr[k][l] = 0; end
    foreach (wr_data[l]) wr_data[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fill_half(1);                 // host fills the half not being read
    swap = 1; @(negedge clk); swap = 0;
    checks++; if (rd_half !== 1'b1) failures++;
    for (int rnd = 0; rnd < 2; rnd++) begin
      for (int t = 0; t < 400; t++) begin
        int ereq, eacc;
        logic [AW-1:0] want [NB];
        logic used [LN][NB];
        logic exp_req [NL][LN];
        logic [AW-1:0] exp_addr [NL][LN];
        ereq = 0; eacc = 0;
        foreach (used[l, b]) used[l][b] = 0;
        for (int l = 0; l < LN; l++) begin
          foreach (want[b]) want[b] = AW'({b[4:0], 7'($urandom)});
          for (int k = 0; k < NL; k++) begin
            int b;
            b = $urandom_range(0, NB - 1);
            rd_req[k][l] = 1'($urandom);
            rd_addr[k][l] = want[b];
            exp_req[k][l] = rd_req[k][l]; exp_addr[k][l] = rd_addr[k][l];
            if (rd_req[k][l]) begin ereq++; if (!used[l][b]) eacc++; used[l][b] = 1; end
          end
        end
        #1;
        checks++;
        if (int'(n_req) != ereq || int'(n_access) != eacc || conflict) begin
          failures++;
          if (failures < 10) $display("FAIL counts %0d/%0d expected %0d/%0d", n_req, n_access, ereq, eacc);
        end
        @(negedge clk);
        for (int k = 0; k < NL; k++)
          for (int l = 0; l < LN; l++) begin
            checks++;
            if (rd_data[k][l] !== (exp_req[k][l] ? img[rnd == 0 ? 1 : 0][l][exp_addr[k][l]] : 8'd0)) begin
              failures++;
              if (failures < 10) $display("FAIL read link %0d lane %0d", k, l);
            end
          end
        // meanwhile the host writes the other half
        wr_en = 1; wr_addr = AW'($urandom);
        for (int l = 0; l < LN; l++) begin wr_data[l] = 8'($urandom); img[rnd == 0 ? 0 : 1][l][wr_addr] = wr_data[l]; end
      end
      foreach (rd_req[k, l]) rd_req[k][l] = 0;
      wr_en = 0;
      if (rnd == 0) begin
        fill_half(0);
        swap = 1; @(negedge clk); swap = 0;
        checks++; if (rd_half !== 1'b0) failures++;
      end
    end
    // a conflicting pair must be flagged
    rd_req[0][0] = 1; rd_addr[0][0] = AW'({5'd3, 7'd1});
    rd_req[1][0] = 1; rd_addr[1][0] = AW'({5'd3, 7'd2});
    #1;
    checks++; if (!conflict) begin failures++; $display("FAIL conflict not flagged"); end
    rd_req[0][0] = 0; rd_req[1][0] = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
