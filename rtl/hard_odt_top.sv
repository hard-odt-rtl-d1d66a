// hard_odt_top: online decision tree (Hoeffding tree) learning system with
// quantile-based numeric attributes, learning and predicting one sample per
// cycle.
//
// Data path:
//   sample in -> streaming sample buffer (sample_fifo) -> tree_pipeline
//   (filters the sample to its leaf; 3 cycles per level) -> internal buffer
//   (sample_fifo) -> inference_engine (majority-vote prediction, emitted
//   before the sample is learned) and training_engine (quantile/histogram
//   learning, split trials) in lock step.
//   training_engine -> split_controller -> node writes into tree_pipeline
//   and new leaf node-element pairs back to training_engine.
//
// The sample controller here releases a sample from the input buffer into
// the tree only while the internal buffer has room for every sample
// already inside the tree, so the tree never has to stall; when the
// training engine pauses for a split trial the internal buffer fills and
// the input buffer takes the back-pressure (in_ready low).
//
// Interface: valid/ready sample input (N_NUM numeric attributes in Q2.30
// followed by N_CAT categorical attribute values, zero-extended to 32 bits,
// and a label); a prediction stream (pred_valid, predicted label, and the
// true label of the same sample, for accuracy counting); event counters
// and the number of elements (leaves) in use. With the pipeline idle a
// sample's prediction appears 3*D_TREE + 3 cycles after it is accepted:
// 1 cycle in the input buffer, 3 per tree level, 1 in the internal buffer
// and 1 in the inference engine's read stage.
// The default parameters are the main configuration of the original
// evaluation (8 quantiles, 10 split points, n_min = 200, depth 15, 1024
// leaves) with the attribute mix of the Electricity data set (7 numeric,
// 1 categorical with 7 values, 2 labels); the attribute mix is this
// design's choice.
//
// rst_n is the asynchronous reset of every flop; it also disables the
// credit and leaf assertions, which the lint tool reports as a synchronous
// use of the reset net.
module hard_odt_top
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
  parameter int N_MIN   = 200,
  parameter int IN_DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                               in_valid,
  output logic                               in_ready,
  input  logic [N_NUM+N_CAT-1:0][DW-1:0]     in_attrs,
  input  logic [$clog2(N_LABEL)-1:0]         in_label,
  output logic                               pred_valid,
  output logic [$clog2(N_LABEL)-1:0]         pred_label,
  output logic [$clog2(N_LABEL)-1:0]         pred_true_label,
  output logic [$clog2(N_ELEM+1)-1:0]        elems_used,
  output logic [31:0]                        n_trials,
  output logic [31:0]                        n_splits,
  output logic [31:0]                        n_refused,
  output logic [31:0]                        n_ties,
  output logic [31:0]                        n_fwd_c,
  output logic [31:0]                        n_fwd_w,
  output logic [31:0]                        n_hist_init,
  output logic [31:0]                        n_stall_cycles
);
  localparam int N_ATTR    = N_NUM + N_CAT;
  localparam int EW        = $clog2(N_ELEM);
  localparam int LW        = $clog2(N_LABEL);
  localparam int LVW       = $clog2(D_TREE + 1);
  localparam int AIW       = $clog2(N_ATTR);
  localparam int NW        = 1 + LVW + D_TREE + AIW + DW;
  localparam int SW        = N_ATTR * DW + LW;          // sample word
  localparam int TW        = SW + EW;                   // traversed sample word
  localparam int INT_DEPTH = 3 * D_TREE + 8;
  localparam int CNTW      = $clog2(INT_DEPTH + 1);

  // ---------------- streaming sample buffer ----------------
  logic          ib_valid, ib_ready;
  logic [SW-1:0] ib_data;
  logic [$clog2(IN_DEPTH+1)-1:0] ib_count;

  sample_fifo #(.WIDTH(SW), .DEPTH(IN_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data({in_attrs, in_label}),
    .out_valid(ib_valid), .out_ready(ib_ready), .out_data(ib_data), .count(ib_count)
  );

  // ---------------- sample controller: credit towards the internal buffer ----
  logic [CNTW-1:0] in_flight;
  logic [CNTW-1:0] xb_count;
  logic            issue, t_out_valid;

  assign ib_ready = (32'(in_flight) + 32'(xb_count) < INT_DEPTH);
  assign issue    = ib_valid && ib_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_flight <= '0;
    else        in_flight <= in_flight + CNTW'(issue) - CNTW'(t_out_valid);
  end

  // ---------------- tree management ----------------
  logic [N_ATTR-1:0][DW-1:0] t_attrs;
  logic [LW-1:0]             t_label;
  logic                      t_found;
  logic [EW-1:0]             t_elem;
  logic [LVW-1:0]            t_leaf_level;
  logic [D_TREE-1:0]         t_leaf_node;
  logic                      wr_en;
  logic [LVW-1:0]            wr_level;
  logic [D_TREE-1:0]         wr_addr;
  logic [NW-1:0]             wr_data;

  tree_pipeline #(
    .D_TREE(D_TREE), .N_ATTR(N_ATTR), .N_NUM(N_NUM), .N_LABEL(N_LABEL), .N_ELEM(N_ELEM)
  ) u_tree (
    .clk, .rst_n,
    .in_valid(issue), .in_attrs(ib_data[SW-1:LW]), .in_label(ib_data[LW-1:0]),
    .out_valid(t_out_valid), .out_attrs(t_attrs), .out_label(t_label), .out_found(t_found),
    .out_elem(t_elem), .out_leaf_level(t_leaf_level), .out_leaf_node(t_leaf_node),
    .wr_en, .wr_level, .wr_addr, .wr_data
  );

  // ---------------- internal buffer ----------------
  logic          xb_valid, xb_ready;
  logic [TW-1:0] xb_data;
  logic          xb_in_ready;

  sample_fifo #(.WIDTH(TW), .DEPTH(INT_DEPTH)) u_int_buf (
    .clk, .rst_n,
    .in_valid(t_out_valid), .in_ready(xb_in_ready), .in_data({t_attrs, t_label, t_elem}),
    .out_valid(xb_valid), .out_ready(xb_ready), .out_data(xb_data), .count(xb_count)
  );

  // The credit scheme guarantees room for every traversed sample.
  assert property (@(posedge clk) disable iff (!rst_n) t_out_valid |-> xb_in_ready);
  // Every sample reaches a leaf.
  assert property (@(posedge clk) disable iff (!rst_n) t_out_valid |-> t_found);

  logic [N_ATTR-1:0][DW-1:0] x_attrs;
  logic [LW-1:0]             x_label;
  logic [EW-1:0]             x_elem;
  assign {x_attrs, x_label, x_elem} = xb_data;

  // ---------------- training engine ----------------
  logic                  te_ready;
  logic                  sreq_valid, sreq_ready;
  logic [EW-1:0]         sreq_elem;
  logic [LVW-1:0]        sreq_level;
  logic [D_TREE-1:0]     sreq_node;
  logic [AIW-1:0]        sreq_attr;
  logic [DW-1:0]         sreq_val;
  logic                  sresp_valid, sresp_accept;
  logic [LVW-1:0]        sresp_level;
  logic [D_TREE-1:0]     sresp_node_l, sresp_node_r;
  logic [EW-1:0]         sresp_elem_l, sresp_elem_r;
  logic                  inf_init_valid;
  logic [EW-1:0]         inf_init_elem;

  assign xb_ready = te_ready;

  training_engine #(
    .N_NUM(N_NUM), .N_CAT(N_CAT), .N_VAL(N_VAL), .N_LABEL(N_LABEL), .N_QUANT(N_QUANT),
    .N_ELEM(N_ELEM), .D_TREE(D_TREE), .N_PT(N_PT), .N_MIN(N_MIN)
  ) u_train (
    .clk, .rst_n,
    .in_valid(xb_valid), .in_ready(te_ready), .in_elem(x_elem), .in_label(x_label),
    .in_attrs(x_attrs),
    .sreq_valid, .sreq_ready, .sreq_elem, .sreq_level, .sreq_node, .sreq_attr, .sreq_val,
    .sresp_valid, .sresp_accept, .sresp_level, .sresp_node_l, .sresp_elem_l,
    .sresp_node_r, .sresp_elem_r,
    .inf_init_valid, .inf_init_elem,
    .n_trials, .n_splits, .n_refused, .n_ties, .n_fwd_c, .n_fwd_w, .n_hist_init, .n_stall_cycles
  );

  // ---------------- inference engine ----------------
  inference_engine #(.N_LABEL(N_LABEL), .N_ELEM(N_ELEM)) u_infer (
    .clk, .rst_n,
    .in_valid(xb_valid && te_ready), .in_elem(x_elem), .in_label(x_label),
    .pred_valid, .pred_label, .pred_true_label,
    .init_valid(inf_init_valid), .init_elem(inf_init_elem)
  );

  // ---------------- split controller ----------------
  split_controller #(.D_TREE(D_TREE), .N_ATTR(N_ATTR), .N_ELEM(N_ELEM)) u_split (
    .clk, .rst_n,
    .req_valid(sreq_valid), .req_ready(sreq_ready), .req_elem(sreq_elem),
    .req_level(sreq_level), .req_node(sreq_node), .req_attr(sreq_attr), .req_val(sreq_val),
    .resp_valid(sresp_valid), .resp_accept(sresp_accept), .resp_level(sresp_level),
    .resp_node_l(sresp_node_l), .resp_elem_l(sresp_elem_l),
    .resp_node_r(sresp_node_r), .resp_elem_r(sresp_elem_r),
    .wr_en, .wr_level, .wr_addr, .wr_data, .elems_used
  );
endmodule
