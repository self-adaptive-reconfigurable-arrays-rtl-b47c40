// sara_config_table: maps an AdaptNet class ID to an array configuration.
//
// Each output class of AdaptNet stands for one configuration of the RSA:
// partition shape and dataflow. The table has NCLASS entries of array_cfg_t and
// is written by the host together with the trained network (the paper derives
// the class list offline and does not print it). After reset it holds an
// enumeration of the full tilings, class c -> dataflow c mod 3,
// log2h (c/3) mod (LC+1), log2w (c/(3*(LC+1))) mod (LC+1), so that the
// array is usable before a trained table is loaded. Lookup is registered:
// the configuration for `cls` appears one cycle later.
module sara_config_table
  import sara_pkg::*;
#(
  parameter int unsigned NCLASS = 858,
  parameter int unsigned LC     = 5,      // log2(cells per array side)
  localparam int unsigned CW    = $clog2(NCLASS)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [CW-1:0] wr_cls,
  input  array_cfg_t   wr_cfg,
  input  logic [CW-1:0] cls,
  output array_cfg_t   cfg
);

  array_cfg_t tbl [NCLASS];

  function automatic array_cfg_t dflt(input int c);
    array_cfg_t r;
    r.df    = dataflow_e'(c % 3);
    r.log2h = 3'((c / 3) % (LC + 1));
    r.log2w = 3'((c / (3 * (LC + 1))) % (LC + 1));
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(NCLASS); c++) tbl[c] <= dflt(c);
      cfg <= dflt(0);
    end else begin
      if (wr_en && int'(wr_cls) < int'(NCLASS)) tbl[wr_cls] <= wr_cfg;
      cfg <= (int'(cls) < int'(NCLASS)) ? tbl[cls] : dflt(0);
    end
  end

endmodule
