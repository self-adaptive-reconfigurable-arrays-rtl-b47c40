// tb_sara_mac: drives one MAC unit with random operations and operands and
// compares its outputs every cycle with a reference model of the six
// operations (clear, output-stationary MAC, drain, stationary load,
// stationary MAC, idle). All state is registered, so outputs are compared
// one cycle after the operation is applied (drain output is combinational).
module tb_sara_mac;
  import sara_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mac_op_e op = OP_IDLE;
  logic [DW-1:0] left_in = 0, right_out;
  logic [ACCW-1:0] top_in = 0, bottom_out;
  int checks = 0, failures = 0;
  sara_mac dut (.*);
  logic [DW-1:0] mh = 0, ms = 0;
  logic [ACCW-1:0] mv = 0, ma = 0;
  int cnt [6];
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      op = mac_op_e'($urandom_range(0, 5));
      left_in = 8'($urandom); top_in = $urandom;
      cnt[int'(op)]++;
      #1;
      checks++;
      if (bottom_out !== ((op == OP_DRAIN) ? ma : mv) || right_out !== mh) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d op=%0d bottom %h right %h", t, op, bottom_out, right_out);
      end
      @(posedge clk);
      unique case (op)
        OP_CLEAR:  begin ma = 0; mv = 0; mh = 0; end
        OP_OS_MAC: begin ma = ma + ACCW'($signed(left_in) * $signed(top_in[7:0])); mh = left_in; mv = sext(top_in[7:0]); end
        OP_DRAIN:  ma = top_in;
        OP_LOAD:   begin ms = top_in[7:0]; mv = sext(top_in[7:0]); end
        OP_ST_MAC: begin mh = left_in; mv = top_in + ACCW'($signed(left_in) * $signed(ms)); end
        default: ;
      endcase
    end
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (cnt[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
