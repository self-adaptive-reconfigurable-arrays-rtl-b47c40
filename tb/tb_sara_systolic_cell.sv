// tb_sara_systolic_cell: one 4 x 4 systolic cell against a reference model of
// its 16 MACs and its two edge multiplexers. Each cycle a random operation,
// random peer and bypass edge data and random bypass selects are applied and
// the right and bottom edge outputs are compared.
module tb_sara_systolic_cell;
  import sara_pkg::*;
  localparam int E = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mac_op_e op = OP_IDLE;
  logic h_byp = 0, v_byp = 0;
  logic [DW-1:0] peer_left [E], byp_left [E], right_out [E];
  logic [ACCW-1:0] peer_top [E], byp_top [E], bottom_out [E];
  int checks = 0, failures = 0;
  sara_systolic_cell #(.CELL(E)) dut (.*);
  logic [DW-1:0]   mh [E][E], ms [E][E];
  logic [ACCW-1:0] mv [E][E], ma [E][E];
  function automatic logic [ACCW-1:0] bot(input int r, input int c);
    return (op == OP_DRAIN) ? ma[r][c] : mv[r][c];
  endfunction
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    foreach (mh[r, c]) begin mh[r][c] = 0; ms[r][c] = 0; mv[r][c] = 0; ma[r][c] = 0; end
    foreach (peer_left[l]) begin peer_left[l] = 0; byp_left[l] = 0; peer_top[l] = 0; byp_top[l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      logic [DW-1:0]   lin [E][E];
      logic [ACCW-1:0] tin [E][E];
      op = mac_op_e'($urandom_range(0, 5));
      h_byp = 1'($urandom); v_byp = 1'($urandom);
      foreach (peer_left[l]) begin
        peer_left[l] = 8'($urandom); byp_left[l] = 8'($urandom);
        peer_top[l] = $urandom; byp_top[l] = $urandom;
      end
      #1;
      for (int l = 0; l < E; l++) begin
        checks++;
        if (right_out[l] !== mh[l][E-1] || bottom_out[l] !== bot(E-1, l)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane %0d", t, l);
        end
      end
      for (int r = 0; r < E; r++)
        for (int c = 0; c < E; c++) begin
          lin[r][c] = (c == 0) ? (h_byp ? byp_left[r] : peer_left[r]) : mh[r][c-1];
          tin[r][c] = (r == 0) ? (v_byp ? byp_top[c] : peer_top[c]) : bot(r-1, c);
        end
      @(posedge clk);
      for (int r = 0; r < E; r++)
        for (int c = 0; c < E; c++)
          unique case (op)
            OP_CLEAR:  begin ma[r][c] = 0; mv[r][c] = 0; mh[r][c] = 0; end
            OP_OS_MAC: begin ma[r][c] = ma[r][c] + ACCW'($signed(lin[r][c]) * $signed(tin[r][c][7:0])); mh[r][c] = lin[r][c]; mv[r][c] = sext(tin[r][c][7:0]); end
            OP_DRAIN:  ma[r][c] = tin[r][c];
            OP_LOAD:   begin ms[r][c] = tin[r][c][7:0]; mv[r][c] = sext(tin[r][c][7:0]); end
            OP_ST_MAC: begin mh[r][c] = lin[r][c]; mv[r][c] = tin[r][c] + ACCW'($signed(lin[r][c]) * $signed(ms[r][c])); end
            default: ;
          endcase
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
