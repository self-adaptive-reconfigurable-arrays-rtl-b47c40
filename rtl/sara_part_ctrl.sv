// sara_part_ctrl: the systolic-array controller of one partition
// (systolicController in the paper's control flow).
//
// One instance sits at every systolic cell; the instance at the top-left cell
// of a partition is enabled and drives the whole partition, the others stay
// idle. Because all partitions of a configuration have the same shape and the
// same number of tiles, every enabled controller runs the same schedule in
// lockstep; only the tile indices differ. This lockstep is what lets
// partitions in one partition row (column) read the same A (B) words in the
// same cycle, so the buffers collate those reads.
//
// Work split (partitionWorkload): partition (pr, pc) of a PR x PC grid owns the
// output tiles whose row tile index is pr mod PR and column tile index is
// pc mod PC.
//   OS  per tile (tm, tn): CLEAR, K+H+W-2 cycles of OS_MAC while A and B
//       stream in skewed, H cycles of DRAIN, then a flush of the pipelines.
//   WS/IS per column tile tn and reduction tile tk: H cycles of LOAD (an H x W
//       block of B enters from the top), MC+H+W cycles of ST_MAC while the
//       partition row's MC rows of A stream in, then a flush. Outputs of
//       tk > 0 are added in the output buffer.
// The controller publishes a part_ctl_t: read-frame fields for the address
// units at the partition edges, the MAC op delayed by the read latency
// (1 SRAM cycle + LINK_STAGES) and write-frame fields delayed by a further
// LINK_STAGES for the output links. The phase lengths follow from the systolic
// timing; the paper states only that a controller per partition drives the GEMM.
module sara_part_ctrl
  import sara_pkg::*;
#(
  parameter int unsigned ROW         = 0,   // cell row of this instance
  parameter int unsigned COL         = 0,   // cell column of this instance
  parameter int unsigned LINK_STAGES = 3
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,      // pulse: begin the GEMM
  input  array_cfg_t cfg,
  input  geom_t      geo,
  output part_ctl_t  ctl,
  output logic       busy
);

  localparam int unsigned LRD = 1 + LINK_STAGES;
  localparam int unsigned LWR = LRD + LINK_STAGES;

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_OSMAC, S_DRAIN, S_LOAD, S_STMAC, S_FLUSH}
    state_e;

  state_e          st;
  logic [TAUW-1:0] cnt;
  logic [DIMW-1:0] so, si;          // outer / inner step counters
  logic [DIMW-1:0] pr, pc;
  logic            enabled, os_mode;
  logic [DIMW-1:0] tm, tn, tk;
  logic [DIMW+3:0] a_base, b_base;
  logic [TAUW-1:0] phase_len;

  // This instance leads a partition if it is the partition's top-left cell.
  assign pr      = DIMW'(ROW >> cfg.log2h);
  assign pc      = DIMW'(COL >> cfg.log2w);
  assign enabled = ((ROW & ((1 << cfg.log2h) - 1)) == 0) && ((COL & ((1 << cfg.log2w) - 1)) == 0);
  assign os_mode = (cfg.df == DF_OS);

  // OS: outer = row tile u, inner = column tile v.  WS/IS: outer = v, inner = tk.
  assign tm     = os_mode ? DIMW'(pr + (so << geo.l2pr)) : '0;
  assign tn     = os_mode ? DIMW'(pc + (si << geo.l2pc)) : DIMW'(pc + (so << geo.l2pc));
  assign tk     = os_mode ? '0 : si;
  assign a_base = os_mode ? (DIMW+4)'(so * geo.d.k) : (DIMW+4)'(si * geo.mc);
  assign b_base = os_mode ? (DIMW+4)'(si * geo.d.k) : (DIMW+4)'(so * geo.kt * geo.h);

  always_comb begin
    unique case (st)
      S_OSMAC: phase_len = TAUW'(geo.d.k + geo.h + geo.w - 2);
      S_DRAIN: phase_len = TAUW'(geo.h);
      S_LOAD:  phase_len = TAUW'(geo.h);
      S_STMAC: phase_len = TAUW'(geo.mc + geo.h + geo.w);
      S_FLUSH: phase_len = TAUW'(LWR + 1);
      default: phase_len = TAUW'(1);
    endcase
  end

  logic last_inner, last_outer;
  assign last_inner = os_mode ? (si == geo.sv - 1) : (si == geo.kt - 1);
  assign last_outer = os_mode ? (so == geo.su - 1) : (so == geo.sv - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= S_IDLE;
      cnt <= '0;
      so  <= '0;
      si  <= '0;
    end else begin
      if (st == S_IDLE) begin
        if (start && enabled) begin
          st  <= os_mode ? S_CLEAR : S_LOAD;
          cnt <= '0;
          so  <= '0;
          si  <= '0;
        end
      end else if (cnt == phase_len - 1) begin
        cnt <= '0;
        unique case (st)
          S_CLEAR: st <= S_OSMAC;
          S_OSMAC: st <= S_DRAIN;
          S_DRAIN: st <= S_FLUSH;
          S_LOAD:  st <= S_STMAC;
          S_STMAC: st <= S_FLUSH;
          S_FLUSH: begin
            if (last_inner) begin
              si <= '0;
              if (last_outer) st <= S_IDLE;
              else begin
                so <= so + 1'b1;
                st <= os_mode ? S_CLEAR : S_LOAD;
              end
            end else begin
              si <= si + 1'b1;
              st <= os_mode ? S_CLEAR : S_LOAD;
            end
          end
          default: st <= S_IDLE;
        endcase
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  assign busy = (st != S_IDLE);

  // Issue-frame information.
  mac_op_e   op_issue;
  part_ctl_t issue;
  always_comb begin
    unique case (st)
      S_CLEAR: op_issue = OP_CLEAR;
      S_OSMAC: op_issue = OP_OS_MAC;
      S_DRAIN: op_issue = OP_DRAIN;
      S_LOAD:  op_issue = OP_LOAD;
      S_STMAC: op_issue = OP_ST_MAC;
      default: op_issue = OP_IDLE;
    endcase
    issue         = '0;
    issue.op      = op_issue;
    issue.rd_os   = (st == S_OSMAC);
    issue.rd_load = (st == S_LOAD);
    issue.rd_ws   = (st == S_STMAC);
    issue.rd_tau  = cnt;
    issue.tm      = tm;
    issue.tn      = tn;
    issue.tk      = tk;
    issue.a_base  = a_base;
    issue.b_base  = b_base;
    issue.wr_os   = (st == S_DRAIN);
    issue.wr_ws   = (st == S_STMAC);
    issue.wr_tau  = cnt;
    issue.wr_tm   = tm;
    issue.wr_tn   = tn;
    issue.wr_acc  = (tk != 0);
  end

  // Delay lines: op by the read latency, write fields by read + output latency.
  mac_op_e   op_dly [LRD];
  part_ctl_t wr_dly [LWR];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(LRD); s++) op_dly[s] <= OP_IDLE;
      for (int s = 0; s < int'(LWR); s++) wr_dly[s] <= '0;
    end else begin
      op_dly[0] <= op_issue;
      wr_dly[0] <= issue;
      for (int s = 1; s < int'(LRD); s++) op_dly[s] <= op_dly[s-1];
      for (int s = 1; s < int'(LWR); s++) wr_dly[s] <= wr_dly[s-1];
    end
  end

  always_comb begin
    ctl        = issue;
    ctl.op     = op_dly[LRD-1];
    ctl.wr_os  = wr_dly[LWR-1].wr_os;
    ctl.wr_ws  = wr_dly[LWR-1].wr_ws;
    ctl.wr_tau = wr_dly[LWR-1].wr_tau;
    ctl.wr_tm  = wr_dly[LWR-1].wr_tm;
    ctl.wr_tn  = wr_dly[LWR-1].wr_tn;
    ctl.wr_acc = wr_dly[LWR-1].wr_acc;
  end

endmodule
