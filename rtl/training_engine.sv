// training_engine: learns the statistics of every leaf and decides splits.
//
// Samples arrive after tree traversal with the element ID of their leaf.
// An element is the physical slot of leaf statistics; the engine keeps a
// node-element table (element -> leaf level and node index) and, per
// element, the sample count n, the per-class counts n_j and the number of
// samples since the last split trial. Each numeric attribute has a
// quantile_learner and each categorical attribute a histogram_learner; all
// of them see every training sample in the same cycle.
//
// Operation (one state machine):
//   IDLE   one sample per cycle is accepted (in_ready high); counts are
//          updated and a train operation goes to all learners. When a
//          leaf's count since its last trial reaches N_MIN, a split trial
//          starts for that element and in_ready drops until it ends.
//   READ   one read-out per class is issued to all learners; the returned
//          quantile sets and histograms are buffered.
//   EVAL   all numeric_split_eval and categorical_split_eval lanes run in
//          parallel (attribute-level parallelism) on the buffers.
//   JUDGE  hoeffding_judge picks the best and second-best attributes and
//          applies the Hoeffding bound and tie rule.
//   SPLIT  on a positive decision a request (element, leaf level/node,
//          attribute, split value) goes to the split controller, which
//          answers with the two new leaf node-element pairs (or refuses).
//   INIT   the table is updated and both elements of the new leaves are
//          initialised: counts cleared, one init operation per class in
//          every quantile learner, status-word clear in every histogram
//          learner, and a clear of the inference engine's counts.
// After reset the engine initialises element 0 and binds it to the root.
// Stalling the input during a trial is this design's choice; it is what
// makes the amortised cost slightly above one cycle per sample.
//
// Counts saturate at 2^CW-1. The per-element counters and the table are
// arrays read combinationally (the quantile memories are the synchronous,
// forwarded ones). Event counters report how often each mechanism ran.
module training_engine
  import hodt_pkg::*;
#(
  parameter int N_NUM   = 7,
  parameter int N_CAT   = 1,
  parameter int N_VAL   = 7,
  parameter int N_LABEL = 2,
  parameter int N_QUANT = 8,
  parameter int N_ELEM  = 1024,
  parameter int D_TREE  = 15,
  parameter int N_PT    = 10,
  parameter int N_MIN   = 200
) (
  input  logic clk,
  input  logic rst_n,
  // samples after tree traversal
  input  logic                                   in_valid,
  output logic                                   in_ready,
  input  logic [$clog2(N_ELEM)-1:0]              in_elem,
  input  logic [$clog2(N_LABEL)-1:0]             in_label,
  input  logic [N_NUM+N_CAT-1:0][DW-1:0]         in_attrs,
  // split request / response (split controller)
  output logic                                   sreq_valid,
  input  logic                                   sreq_ready,
  output logic [$clog2(N_ELEM)-1:0]              sreq_elem,
  output logic [$clog2(D_TREE+1)-1:0]            sreq_level,
  output logic [D_TREE-1:0]                      sreq_node,
  output logic [$clog2(N_NUM+N_CAT)-1:0]         sreq_attr,
  output logic [DW-1:0]                          sreq_val,
  input  logic                                   sresp_valid,
  input  logic                                   sresp_accept,
  input  logic [$clog2(D_TREE+1)-1:0]            sresp_level,
  input  logic [D_TREE-1:0]                      sresp_node_l,
  input  logic [$clog2(N_ELEM)-1:0]              sresp_elem_l,
  input  logic [D_TREE-1:0]                      sresp_node_r,
  input  logic [$clog2(N_ELEM)-1:0]              sresp_elem_r,
  // element initialisation towards the inference engine
  output logic                                   inf_init_valid,
  output logic [$clog2(N_ELEM)-1:0]              inf_init_elem,
  // event counters
  output logic [31:0]                            n_trials,
  output logic [31:0]                            n_splits,
  output logic [31:0]                            n_refused,
  output logic [31:0]                            n_ties,
  output logic [31:0]                            n_fwd_c,
  output logic [31:0]                            n_fwd_w,
  output logic [31:0]                            n_hist_init,
  output logic [31:0]                            n_stall_cycles
);
  localparam int N_ATTR = N_NUM + N_CAT;
  localparam int NC1    = (N_CAT > 0) ? N_CAT : 1;
  localparam int EW     = $clog2(N_ELEM);
  localparam int LW     = $clog2(N_LABEL);
  localparam int LVW    = $clog2(D_TREE + 1);
  localparam int AIW    = $clog2(N_ATTR);
  localparam int VW     = $clog2(N_VAL);
  localparam int EVW    = (N_PT > N_VAL) ? N_PT : N_VAL;

  typedef enum logic [3:0] {
    S_RSTINIT, S_IDLE, S_READ, S_WAITRD, S_EVAL, S_JUDGE, S_SREQ, S_SRESP, S_INIT
  } state_e;
  state_e state;

  // ---------------- per-element status and node-element table ----------------
  logic [CW-1:0]              n_mem     [N_ELEM];
  logic [N_LABEL-1:0][CW-1:0] ncls_mem  [N_ELEM];
  logic [CW-1:0]              since_mem [N_ELEM];
  logic [LVW-1:0]             tlev_mem  [N_ELEM];
  logic [D_TREE-1:0]          tnode_mem [N_ELEM];

  logic [EW-1:0]  trial_elem;
  logic [LW:0]    cls_cnt;          // class counter for READ / INIT sequences
  logic [3:0]     wait_cnt;
  logic           init_second;      // INIT: working on the second element
  logic [EW-1:0]  init_e0, init_e1;

  // ---------------- learner operation bus ----------------
  logic          op_valid;
  learn_op_e     op;
  logic [EW-1:0] op_elem;
  logic [LW-1:0] op_label;

  logic accept;
  assign in_ready = (state == S_IDLE);
  assign accept   = in_valid && in_ready;

  always_comb begin
    op_valid = 1'b0;
    op       = OP_TRAIN;
    op_elem  = in_elem;
    op_label = in_label;
    case (state)
      S_IDLE: op_valid = accept;
      S_READ: begin
        op_valid = 1'b1;
        op       = OP_READ;
        op_elem  = trial_elem;
        op_label = LW'(cls_cnt);
      end
      S_RSTINIT, S_INIT: begin
        op_valid = 1'b1;
        op       = OP_INIT;
        op_elem  = init_second ? init_e1 : init_e0;
        op_label = LW'(cls_cnt);
      end
      default: ;
    endcase
  end

  // ---------------- learners ----------------
  logic [N_NUM-1:0]                                   q_rd_v;
  logic [N_NUM-1:0][LW-1:0]                           q_rd_l;
  logic [N_NUM-1:0][N_QUANT-1:0][DW-1:0]              q_rd_q;
  logic [N_NUM-1:0][DW-1:0]                           mm_min, mm_max;
  logic [N_NUM-1:0]                                   fwd_c, fwd_w;
  logic [N_NUM-1:0][N_LABEL-1:0][N_QUANT-1:0][DW-1:0] qbuf;

  logic [NC1-1:0]                                     h_rd_v;
  logic [NC1-1:0][LW-1:0]                             h_rd_l;
  logic [NC1-1:0][N_VAL-1:0][CW-1:0]                  h_rd_h;
  logic [NC1-1:0]                                     h_init;
  logic [NC1-1:0][N_VAL-1:0][N_LABEL-1:0][CW-1:0]     hbuf;

  for (genvar a = 0; a < N_NUM; a++) begin : g_num
    quantile_learner #(.N_QUANT(N_QUANT), .N_LABEL(N_LABEL), .N_ELEM(N_ELEM)) u_ql (
      .clk, .rst_n,
      .in_valid(op_valid), .in_op(op), .in_elem(op_elem), .in_label(op_label),
      .in_x(in_attrs[a]),
      .rd_valid(q_rd_v[a]), .rd_label(q_rd_l[a]), .rd_q(q_rd_q[a]),
      .mm_elem(trial_elem), .mm_min(mm_min[a]), .mm_max(mm_max[a]),
      .fwd_c_hit(fwd_c[a]), .fwd_w_hit(fwd_w[a])
    );
    always_ff @(posedge clk) begin
      if (q_rd_v[a]) qbuf[a][q_rd_l[a]] <= q_rd_q[a];
    end
  end

  if (N_CAT > 0) begin : g_cat_on
    for (genvar c = 0; c < N_CAT; c++) begin : g_cat
      histogram_learner #(.N_VAL(N_VAL), .N_LABEL(N_LABEL), .N_ELEM(N_ELEM)) u_hl (
        .clk, .rst_n,
        .in_valid(op_valid), .in_op(op), .in_elem(op_elem), .in_label(op_label),
        .in_value(in_attrs[N_NUM + c][VW-1:0]),
        .rd_valid(h_rd_v[c]), .rd_label(h_rd_l[c]), .rd_hist(h_rd_h[c]),
        .init_hit(h_init[c])
      );
      always_ff @(posedge clk) begin
        if (h_rd_v[c])
          for (int v = 0; v < N_VAL; v++) hbuf[c][v][h_rd_l[c]] <= h_rd_h[c][v];
      end
    end
  end else begin : g_cat_off
    assign h_rd_v = '0;
    assign h_rd_l = '0;
    assign h_rd_h = '0;
    assign h_init = '0;
    assign hbuf   = '0;
  end

  // ---------------- split trial evaluation ----------------
  logic                       eval_start;
  logic [N_LABEL-1:0][CW-1:0] t_ncls;
  logic [CW-1:0]              t_n;
  logic [N_ATTR-1:0]          ev_done, ev_done_seen, cand_valid;
  logic [N_ATTR-1:0][SQW-1:0] cand_sq;
  logic [N_ATTR-1:0][DW-1:0]  cand_val;

  assign t_ncls = ncls_mem[trial_elem];
  assign t_n    = n_mem[trial_elem];

  for (genvar a = 0; a < N_NUM; a++) begin : g_nev
    numeric_split_eval #(.N_QUANT(N_QUANT), .N_LABEL(N_LABEL), .N_PT(N_PT)) u_nev (
      .clk, .rst_n, .start(eval_start), .q(qbuf[a]), .min_val(mm_min[a]), .max_val(mm_max[a]),
      .n_cls(t_ncls), .done(ev_done[a]), .best_valid(cand_valid[a]),
      .best_sq(cand_sq[a]), .best_pt(cand_val[a])
    );
  end
  for (genvar c = 0; c < N_CAT; c++) begin : g_cev
    categorical_split_eval #(.N_VAL(N_VAL), .N_LABEL(N_LABEL)) u_cev (
      .clk, .rst_n, .start(eval_start), .hist(hbuf[c]), .n_cls(t_ncls),
      .done(ev_done[N_NUM + c]), .best_valid(cand_valid[N_NUM + c]),
      .best_sq(cand_sq[N_NUM + c]), .best_val(cand_val[N_NUM + c])
    );
  end

  logic           judge_start, judge_done, judge_split, judge_tie;
  logic [AIW-1:0] judge_attr;
  logic [DW-1:0]  judge_val;

  hoeffding_judge #(.N_ATTR(N_ATTR), .N_LABEL(N_LABEL)) u_judge (
    .clk, .rst_n, .start(judge_start), .cand_valid, .cand_sq, .cand_val,
    .n_cls(t_ncls), .n_total(t_n), .done(judge_done), .split(judge_split), .tie(judge_tie),
    .split_attr(judge_attr), .split_val(judge_val)
  );

  // ---------------- split request ----------------
  assign sreq_valid = (state == S_SREQ);
  assign sreq_elem  = trial_elem;
  assign sreq_level = tlev_mem[trial_elem];
  assign sreq_node  = tnode_mem[trial_elem];
  assign sreq_attr  = judge_attr;
  assign sreq_val   = judge_val;

  assign inf_init_valid = ((state == S_INIT) || (state == S_RSTINIT)) && (cls_cnt == '0);
  assign inf_init_elem  = init_second ? init_e1 : init_e0;

  // ---------------- control ----------------
  logic [CW-1:0] since_next;
  assign since_next = since_mem[in_elem] + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_RSTINIT;
      trial_elem   <= '0;
      cls_cnt      <= '0;
      wait_cnt     <= '0;
      init_second  <= 1'b0;
      init_e0      <= '0;
      init_e1      <= '0;
      eval_start   <= 1'b0;
      judge_start  <= 1'b0;
      ev_done_seen <= '0;
    end else begin
      eval_start  <= 1'b0;
      judge_start <= 1'b0;
      case (state)
        S_RSTINIT, S_INIT: begin
          if (cls_cnt == (LW+1)'(N_LABEL - 1)) begin
            cls_cnt <= '0;
            if (state == S_RSTINIT || init_second) begin
              init_second <= 1'b0;
              state       <= S_IDLE;
            end else begin
              init_second <= 1'b1;
            end
          end else begin
            cls_cnt <= cls_cnt + 1'b1;
          end
        end
        S_IDLE: begin
          if (accept && 32'(since_next) >= N_MIN) begin
            trial_elem <= in_elem;
            cls_cnt    <= '0;
            state      <= S_READ;
          end
        end
        S_READ: begin
          if (cls_cnt == (LW+1)'(N_LABEL - 1)) begin
            cls_cnt  <= '0;
            wait_cnt <= '0;
            state    <= S_WAITRD;
          end else begin
            cls_cnt <= cls_cnt + 1'b1;
          end
        end
        S_WAITRD: begin
          // read-outs return 4 cycles after issue
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == 4'd5) begin
            eval_start   <= 1'b1;
            ev_done_seen <= '0;
            state        <= S_EVAL;
          end
        end
        S_EVAL: begin
          ev_done_seen <= ev_done_seen | ev_done;
          if ((ev_done_seen | ev_done) == '1) begin
            judge_start <= 1'b1;
            state       <= S_JUDGE;
          end
        end
        S_JUDGE: begin
          if (judge_done) state <= judge_split ? S_SREQ : S_IDLE;
        end
        S_SREQ: begin
          if (sreq_ready) state <= S_SRESP;
        end
        S_SRESP: begin
          if (sresp_valid) begin
            if (sresp_accept) begin
              init_e0     <= sresp_elem_l;
              init_e1     <= sresp_elem_r;
              init_second <= 1'b0;
              cls_cnt     <= '0;
              state       <= S_INIT;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // per-element counters and table
  always_ff @(posedge clk) begin
    if (state == S_IDLE && accept) begin
      if (n_mem[in_elem] != '1) n_mem[in_elem] <= n_mem[in_elem] + 1'b1;
      if (ncls_mem[in_elem][in_label] != '1)
        ncls_mem[in_elem][in_label] <= ncls_mem[in_elem][in_label] + 1'b1;
      since_mem[in_elem] <= (32'(since_next) >= N_MIN) ? '0 : since_next;
    end
    if ((state == S_INIT || state == S_RSTINIT) && cls_cnt == '0) begin
      n_mem[op_elem]     <= '0;
      ncls_mem[op_elem]  <= '0;
      since_mem[op_elem] <= '0;
    end
    if (state == S_RSTINIT) begin
      tlev_mem[0]  <= LVW'(1);
      tnode_mem[0] <= '0;
    end
    if (state == S_SRESP && sresp_valid && sresp_accept) begin
      tlev_mem[sresp_elem_l]  <= sresp_level;
      tnode_mem[sresp_elem_l] <= sresp_node_l;
      tlev_mem[sresp_elem_r]  <= sresp_level;
      tnode_mem[sresp_elem_r] <= sresp_node_r;
    end
  end

  // ---------------- event counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_trials <= '0; n_splits <= '0; n_refused <= '0; n_ties <= '0;
      n_fwd_c <= '0; n_fwd_w <= '0; n_hist_init <= '0; n_stall_cycles <= '0;
    end else begin
      if (eval_start) n_trials <= n_trials + 1;
      if (state == S_SRESP && sresp_valid && sresp_accept)  n_splits  <= n_splits + 1;
      if (state == S_SRESP && sresp_valid && !sresp_accept) n_refused <= n_refused + 1;
      if (state == S_JUDGE && judge_done && judge_tie) n_ties <= n_ties + 1;
      if (|fwd_c) n_fwd_c <= n_fwd_c + 1;
      if (|fwd_w) n_fwd_w <= n_fwd_w + 1;
      if (|h_init) n_hist_init <= n_hist_init + 1;
      if (in_valid && !in_ready) n_stall_cycles <= n_stall_cycles + 1;
    end
  end
endmodule
