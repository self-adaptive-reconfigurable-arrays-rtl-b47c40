// tb_sara_anx_unit: one AdaptNetX 1-D unit of 256 multipliers. Latches random
// input vectors, streams random weight rows one per cycle and checks that
// each dot product appears with its tag 2 clock edges after its row is presented
// (multiply stage + adder tree stage), i.e. one result per cycle.
module tb_sara_anx_unit;
  import sara_pkg::*;
  localparam int W = 256, TW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0, w_valid = 0, y_valid;
  logic [DW-1:0] x_in [W], w_row [W];
  logic [TW-1:0] w_tag = 0, y_tag;
  logic [ACCW-1:0] y;
  int checks = 0, failures = 0;
  int expq [$]; int tagq [$]; int vq [$];
  sara_anx_unit #(.WIDTH(W), .TAGW(TW)) dut (.*);
  logic signed [7:0] xm [W];
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    foreach (x_in[i]) begin x_in[i] = 0; w_row[i] = 0; xm[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int s;
      load = (t % 500 == 0);
      foreach (x_in[i]) x_in[i] = 8'($urandom);
      if (load) foreach (xm[i]) xm[i] = x_in[i];
      // the row issued in this cycle meets the vector latched by an earlier load
      w_valid = !load && ($urandom_range(0, 4) != 0);
      w_tag = TW'($urandom);
      foreach (w_row[i]) w_row[i] = 8'($urandom);
      s = 0;
      foreach (w_row[i]) s += int'(xm[i]) * int'($signed(w_row[i]));
      expq.push_back(s); tagq.push_back(int'(w_tag)); vq.push_back(int'(w_valid));
      @(negedge clk);
      if (t >= 1) begin
        int e, g, v;
        e = expq.pop_front(); g = tagq.pop_front(); v = vq.pop_front();
        checks++;
        if (y_valid !== v[0] || (v != 0 && (int'($signed(y)) != e || int'(y_tag) != g))) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d y=%0d exp %0d valid %0d/%0d", t, $signed(y), e, y_valid, v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
