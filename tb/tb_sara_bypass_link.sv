// tb_sara_bypass_link: sends a random word every cycle into a bypass link of
// 3 pipeline stages (a flop after each 8 systolic cells of a 32-cell row) and
// checks that each word comes out unchanged exactly 3 cycles later.
module tb_sara_bypass_link;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] in_data = 0, out_data;
  logic [31:0] hist [$];
  int checks = 0, failures = 0;
  sara_bypass_link #(.WIDTH(32), .STAGES(3)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (t >= 3) begin
        checks++;
        if (out_data !== hist[t-3]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d got %h expected %h", t, out_data, hist[t-3]);
        end
      end
      in_data = $urandom;
      hist.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
