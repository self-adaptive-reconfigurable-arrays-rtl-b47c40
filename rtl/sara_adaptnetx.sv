// sara_adaptnetx: the AdaptNetX core, hardware for the AdaptNet recommender.
//
// AdaptNet maps a GEMM (M, N, K) to the class ID of the best array
// configuration. Its structure, from the paper: an embedding lookup for each
// input feature, one dense hidden layer of HIDDEN (128) nodes, and an output
// layer of NCLASS (858) classes with softmax. Because softmax is monotonic,
// the core returns the argmax of the output logits, which is the class the
// softmax would rank first.
//
// Datapath: NUNITS (2) 1-D units of WIDTH (256) multipliers with adder trees
// (sara_anx_unit), run input stationary: the layer input vector is latched in
// every unit and the weight rows of the layer's neurons stream from the
// weight SRAM, one row per unit per cycle. Layer 1 takes 128/2 = 64 issue
// cycles, layer 2 429; a query takes about 508 cycles in total.
//
// This design's choices (the paper is silent on them): 8-bit signed weights and
// embeddings, EDIM = 8 entries per embedding, one embedding row per feature
// value with the value clamped to EMB_ROWS-1 (EMB_ROWS = 10240 covers the
// paper's training range of dimensions up to 10^4), ReLU on the hidden layer
// followed by an arithmetic right shift of hid_shift and saturation to 0..127,
// and biases held as the weight of a constant-1 input placed just after the
// real inputs. Storage: 3 x 10240 x 8 B of embeddings plus (128 + 858) rows of
// 256 B of weights, 492 KB, inside the paper's 512 KB AdaptNetX SRAM.
//
// Host port: wr_sel = 0 writes embedding row wr_row (64-bit word), wr_sel = 1
// writes 8-byte word wr_word of weight row wr_row (rows 0..HIDDEN-1 are layer
// 1 neurons, rows HIDDEN.. are output classes). Query: pulse start with dims;
// busy stays high until done pulses with class_id valid.
module sara_adaptnetx
  import sara_pkg::*;
#(
  parameter int unsigned NCLASS   = 858,
  parameter int unsigned HIDDEN   = 128,
  parameter int unsigned EDIM     = 8,
  parameter int unsigned EMB_ROWS = 10240,
  parameter int unsigned WIDTH    = 256,
  parameter int unsigned NUNITS   = 2,
  localparam int unsigned NFEAT   = 3,
  localparam int unsigned NROWS   = HIDDEN + NCLASS,
  localparam int unsigned RW      = $clog2(NROWS > NFEAT*EMB_ROWS ? NROWS : NFEAT*EMB_ROWS),
  localparam int unsigned CW      = $clog2(NCLASS),
  localparam int unsigned TAGW    = $clog2(NROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // host load port
  input  logic            wr_en,
  input  logic            wr_sel,
  input  logic [RW-1:0]   wr_row,
  input  logic [4:0]      wr_word,
  input  logic [63:0]     wr_data,
  input  logic [3:0]      hid_shift,
  // query
  input  logic            start,
  input  gemm_dims_t      dims,
  output logic            busy,
  output logic            done,
  output logic [CW-1:0]   class_id
);

  localparam int unsigned NWORD = WIDTH / 8;

  // ---------------- storage ----------------
  logic [EDIM*DW-1:0] emb_mem [NFEAT*EMB_ROWS];
  logic [63:0]        wt_mem  [NROWS][NWORD];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_sel && int'(wr_row) < int'(NFEAT*EMB_ROWS)) emb_mem[wr_row] <= wr_data[EDIM*DW-1:0];
    if (wr_en &&  wr_sel && int'(wr_row) < int'(NROWS) && int'(wr_word) < int'(NWORD)) wt_mem[wr_row][wr_word] <= wr_data;
  end

  // ---------------- control ----------------
  typedef enum logic [2:0] {S_IDLE, S_EMB, S_L1, S_L1W, S_L2, S_L2W, S_DONE} state_e;
  state_e st;

  logic [TAGW-1:0]  issue_idx;     // next neuron / class index of the layer
  logic [TAGW:0]    recv_cnt;
  logic [2:0]       emb_cnt;
  logic [DW-1:0]    x1 [WIDTH];
  logic [DW-1:0]    hid [HIDDEN];
  logic [DW-1:0]    xv [WIDTH];
  logic             load_units;
  logic [CW-1:0]    best_cls;
  logic signed [ACCW-1:0] best_val;
  logic             best_any;

  // embedding read (synchronous, one row per cycle)
  logic [RW-1:0]      emb_addr;
  logic [EDIM*DW-1:0] emb_q;
  logic [1:0]         emb_f_q;
  logic               emb_v_q;
  logic [DIMW-1:0]    feat;

  always_comb begin
    unique case (emb_cnt)
      3'd0:    feat = dims.m;
      3'd1:    feat = dims.n;
      default: feat = dims.k;
    endcase
    if (feat > DIMW'(EMB_ROWS - 1)) feat = DIMW'(EMB_ROWS - 1);
    emb_addr = RW'(int'(emb_cnt) * int'(EMB_ROWS) + int'(feat));
  end

  always_ff @(posedge clk) emb_q <= emb_mem[emb_addr];

  // input vector of the current layer
  always_comb begin
    for (int i = 0; i < int'(WIDTH); i++) xv[i] = '0;
    if (st == S_EMB || st == S_L1 || st == S_L1W) begin
      xv = x1;
    end else begin
      for (int i = 0; i < int'(HIDDEN); i++) xv[i] = hid[i];
      xv[HIDDEN] = DW'(1);
    end
  end

  // weight row issue: unit u gets row base + issue_idx + u
  logic            iss_v   [NUNITS];
  logic [TAGW-1:0] iss_tag [NUNITS];
  logic [TAGW-1:0] iss_row [NUNITS];
  logic [TAGW-1:0] layer_n;
  assign layer_n = (st == S_L1) ? TAGW'(HIDDEN) : TAGW'(NCLASS);
  for (genvar u = 0; u < NUNITS; u++) begin : g_iss
    assign iss_tag[u] = issue_idx + TAGW'(u);
    assign iss_v[u]   = (st == S_L1 || st == S_L2) && (iss_tag[u] < layer_n);
    assign iss_row[u] = (st == S_L1) ? iss_tag[u] : TAGW'(HIDDEN) + iss_tag[u];
  end

  // units
  logic            y_v   [NUNITS];
  logic [ACCW-1:0] y     [NUNITS];
  logic [TAGW-1:0] y_tag [NUNITS];
  for (genvar u = 0; u < NUNITS; u++) begin : g_unit
    logic [DW-1:0]   row_q [WIDTH];
    logic            v_q;
    logic [TAGW-1:0] t_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_q <= 1'b0;
        t_q <= '0;
      end else begin
        v_q <= iss_v[u];
        t_q <= iss_tag[u];
      end
    end
    always_ff @(posedge clk) begin
      for (int i = 0; i < int'(WIDTH); i++)
        row_q[i] <= wt_mem[iss_row[u]][i/8][(i%8)*8 +: 8];
    end
    sara_anx_unit #(.WIDTH(WIDTH), .TAGW(TAGW)) u_unit (
      .clk, .rst_n,
      .load   (load_units),
      .x_in   (xv),
      .w_valid(v_q),
      .w_row  (row_q),
      .w_tag  (t_q),
      .y_valid(y_v[u]),
      .y      (y[u]),
      .y_tag  (y_tag[u])
    );
  end

  function automatic logic [DW-1:0] requant(input logic signed [ACCW-1:0] v, input logic [3:0] sh);
    logic signed [ACCW-1:0] s;
    s = v >>> sh;
    if (s < 0)        return '0;
    else if (s > 127) return DW'(127);
    else              return DW'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      issue_idx  <= '0;
      recv_cnt   <= '0;
      emb_cnt    <= '0;
      emb_f_q    <= '0;
      emb_v_q    <= 1'b0;
      load_units <= 1'b0;
      best_cls   <= '0;
      best_val   <= '0;
      best_any   <= 1'b0;
      done       <= 1'b0;
      class_id   <= '0;
      for (int i = 0; i < int'(WIDTH); i++) x1[i] <= '0;
      for (int i = 0; i < int'(HIDDEN); i++) hid[i] <= '0;
    end else begin
      done       <= 1'b0;
      load_units <= 1'b0;
      emb_v_q    <= (st == S_EMB) && (emb_cnt < 3'(NFEAT));
      emb_f_q    <= emb_cnt[1:0];
      if (emb_v_q) begin
        for (int e = 0; e < int'(EDIM); e++)
          x1[int'(emb_f_q)*int'(EDIM) + e] <= emb_q[e*DW +: DW];
      end
      // collect results (before the state update so that the counter
      // reset on a layer change takes precedence)
      if (st == S_L1 || st == S_L1W) begin
        int cnt;
        cnt = 0;
        for (int u = 0; u < int'(NUNITS); u++)
          if (y_v[u]) begin
            hid[y_tag[u]] <= requant(y[u], hid_shift);
            cnt++;
          end
        recv_cnt <= recv_cnt + (TAGW+1)'(cnt);
      end else if (st == S_L2 || st == S_L2W) begin
        int cnt;
        logic signed [ACCW-1:0] bv;
        logic [CW-1:0]          bc;
        logic                   ba;
        cnt = 0;
        bv  = best_val;
        bc  = best_cls;
        ba  = best_any;
        for (int u = 0; u < int'(NUNITS); u++)
          if (y_v[u]) begin
            if (!ba || $signed(y[u]) > bv || ($signed(y[u]) == bv && CW'(y_tag[u]) < bc)) begin
              bv = $signed(y[u]);
              bc = CW'(y_tag[u]);
            end
            ba = 1'b1;
            cnt++;
          end
        best_val <= bv;
        best_cls <= bc;
        best_any <= ba;
        recv_cnt <= recv_cnt + (TAGW+1)'(cnt);
      end
      unique case (st)
        S_IDLE: if (start) begin
          st      <= S_EMB;
          emb_cnt <= '0;
          for (int i = 0; i < int'(WIDTH); i++) x1[i] <= '0;
          x1[NFEAT*EDIM] <= DW'(1);
        end
        S_EMB: begin
          if (emb_cnt == 3'(NFEAT + 1)) begin   // last embedding captured
            load_units <= 1'b1;
            st         <= S_L1;
            issue_idx  <= '0;
            recv_cnt   <= '0;
          end else begin
            emb_cnt <= emb_cnt + 1'b1;
          end
        end
        S_L1, S_L2: begin
          if (!load_units) begin
            if (int'(issue_idx) + int'(NUNITS) >= int'(layer_n)) st <= (st == S_L1) ? S_L1W : S_L2W;
            issue_idx <= issue_idx + TAGW'(NUNITS);
          end
        end
        S_L1W: if (int'(recv_cnt) == int'(HIDDEN)) begin
          st         <= S_L2;
          load_units <= 1'b1;
          issue_idx  <= '0;
          recv_cnt   <= '0;
          best_any   <= 1'b0;
        end
        S_L2W: if (int'(recv_cnt) == int'(NCLASS)) st <= S_DONE;
        S_DONE: begin
          class_id <= best_cls;
          done     <= 1'b1;
          st       <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

endmodule
