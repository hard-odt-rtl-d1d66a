// tree_pipeline: tree node storage and sample traversal for the whole tree.
//
// D_TREE tree_level instances are chained; each sample enters at the root
// with node index 0 and leaves after 3*D_TREE cycles (three stages per
// level) carrying the element ID, level and node index of the leaf it
// reached. One sample can enter every cycle. The node write bus from the
// split controller is broadcast to all levels; each level takes the writes
// addressed to it. The separate memory per level and the 3-cycle latency
// per level follow the original architecture.
module tree_pipeline
  import hodt_pkg::*;
#(
  parameter int D_TREE  = 15,
  parameter int N_ATTR  = 8,
  parameter int N_NUM   = 7,
  parameter int N_LABEL = 2,
  parameter int N_ELEM  = 1024
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                          in_valid,
  input  logic [N_ATTR-1:0][DW-1:0]     in_attrs,
  input  logic [$clog2(N_LABEL)-1:0]    in_label,
  output logic                          out_valid,
  output logic [N_ATTR-1:0][DW-1:0]     out_attrs,
  output logic [$clog2(N_LABEL)-1:0]    out_label,
  output logic                          out_found,
  output logic [$clog2(N_ELEM)-1:0]     out_elem,
  output logic [$clog2(D_TREE+1)-1:0]   out_leaf_level,
  output logic [D_TREE-1:0]             out_leaf_node,
  input  logic                          wr_en,
  input  logic [$clog2(D_TREE+1)-1:0]   wr_level,
  input  logic [D_TREE-1:0]             wr_addr,
  input  logic [1+$clog2(D_TREE+1)+D_TREE+$clog2(N_ATTR)+DW-1:0] wr_data
);
  localparam int LVW = $clog2(D_TREE + 1);
  localparam int EW  = $clog2(N_ELEM);
  localparam int LW  = $clog2(N_LABEL);

  logic                      v   [D_TREE+1];
  logic [N_ATTR-1:0][DW-1:0] at  [D_TREE+1];
  logic [LW-1:0]             lb  [D_TREE+1];
  logic [D_TREE-1:0]         nd  [D_TREE+1];
  logic                      fd  [D_TREE+1];
  logic [EW-1:0]             el  [D_TREE+1];
  logic [LVW-1:0]            ll  [D_TREE+1];
  logic [D_TREE-1:0]         ln  [D_TREE+1];

  assign v[0]  = in_valid;
  assign at[0] = in_attrs;
  assign lb[0] = in_label;
  assign nd[0] = '0;
  assign fd[0] = 1'b0;
  assign el[0] = '0;
  assign ll[0] = '0;
  assign ln[0] = '0;

  for (genvar k = 0; k < D_TREE; k++) begin : g_level
    tree_level #(
      .LEVEL(k + 1), .D_TREE(D_TREE), .N_ATTR(N_ATTR), .N_NUM(N_NUM),
      .N_LABEL(N_LABEL), .N_ELEM(N_ELEM)
    ) u_level (
      .clk, .rst_n,
      .in_valid(v[k]), .in_attrs(at[k]), .in_label(lb[k]), .in_node(nd[k]),
      .in_found(fd[k]), .in_elem(el[k]), .in_leaf_level(ll[k]), .in_leaf_node(ln[k]),
      .out_valid(v[k+1]), .out_attrs(at[k+1]), .out_label(lb[k+1]), .out_node(nd[k+1]),
      .out_found(fd[k+1]), .out_elem(el[k+1]), .out_leaf_level(ll[k+1]), .out_leaf_node(ln[k+1]),
      .wr_en, .wr_level, .wr_addr, .wr_data
    );
  end

  assign out_valid      = v[D_TREE];
  assign out_attrs      = at[D_TREE];
  assign out_label      = lb[D_TREE];
  assign out_found      = fd[D_TREE];
  assign out_elem       = el[D_TREE];
  assign out_leaf_level = ll[D_TREE];
  assign out_leaf_node  = ln[D_TREE];
endmodule
