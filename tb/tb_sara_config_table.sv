// tb_sara_config_table: checks the reset contents of the class-to-
// configuration table (class c -> dataflow c mod 3, partition height
// 2^((c/3) mod 6), width 2^((c/18) mod 6)), the one-cycle registered lookup,
// and that host writes replace entries without disturbing the others.
module tb_sara_config_table;
  import sara_pkg::*;
  localparam int NC = 858, LC = 5, CW = $clog2(NC);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [CW-1:0] wr_cls = 0, cls = 0;
  array_cfg_t wr_cfg = '0, cfg;
  array_cfg_t model [NC];
  int checks = 0, failures = 0;
  sara_config_table #(.NCLASS(NC), .LC(LC)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int c = 0; c < NC; c++)
      model[c] = '{df: dataflow_e'(c % 3), log2h: 3'((c / 3) % (LC + 1)), log2w: 3'((c / (3 * (LC + 1))) % (LC + 1))};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int c;
      c = $urandom_range(0, NC - 1);
      wr_en = (t > 1000) && ($urandom_range(0, 3) == 0);
      wr_cls = CW'($urandom_range(0, NC - 1));
      wr_cfg = '{df: dataflow_e'($urandom_range(0, 2)), log2h: 3'($urandom_range(0, 5)), log2w: 3'($urandom_range(0, 5))};
      cls = CW'(c);
      @(negedge clk);
      checks++;
      if (cfg != model[c]) begin
        failures++;
        if (failures < 10) $display("FAIL class %0d: %p expected %p", c, cfg, model[c]);
      end
      if (wr_en) model[wr_cls] = wr_cfg;
    end
    wr_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
