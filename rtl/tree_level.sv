// tree_level: one level of the decision tree with its own node memory and a
// three-stage traversal pipeline.
//
// The tree is stored level by level: level k (1-based) holds 2^(k-1) node
// words, and the children of node i of level k are nodes 2i (left) and 2i+1
// (right) of level k+1. Because every level has its own memory, one read
// port serves traversal and one write port serves node splitting, so the
// whole tree forms a deep pipeline that accepts one sample per cycle.
//
// Traversal stages, one clock each:
//   R  the node word addressed by the incoming node ID is read;
//   A  the attribute named by the node's attribute index is selected;
//   B  branch decision. A numeric attribute goes left when attr <= split
//      value (signed), a categorical one when attr == split value. A leaf
//      node ends the search: the token is marked found and takes the leaf's
//      element ID (the "leaf information to training"). Found tokens pass
//      through later levels untouched.
// Latency is exactly 3 cycles; throughput one token per cycle.
//
// Node word (MSB first), following the bit decomposition of the original:
//   internal: {type=1, level, node ID, attribute index, split value}
//   leaf:     {type=0, unused, element ID in the low bits}
// Node writes come from the split pipeline through wr_*; a write whose
// wr_level equals LEVEL lands here. Level 1 holds only the root, kept in a
// register that resets to a leaf bound to element 0 (this design's choice
// of initial element). Reads are read-before-write: a sample reading a node
// in the cycle it is overwritten sees the old word.
module tree_level
  import hodt_pkg::*;
#(
  parameter int LEVEL   = 1,
  parameter int D_TREE  = 15,
  parameter int N_ATTR  = 8,
  parameter int N_NUM   = 7,
  parameter int N_LABEL = 2,
  parameter int N_ELEM  = 1024
) (
  input  logic clk,
  input  logic rst_n,
  // incoming token
  input  logic                              in_valid,
  input  logic [N_ATTR-1:0][DW-1:0]         in_attrs,
  input  logic [$clog2(N_LABEL)-1:0]        in_label,
  input  logic [D_TREE-1:0]                 in_node,   // node index within this level
  input  logic                              in_found,
  input  logic [$clog2(N_ELEM)-1:0]         in_elem,
  input  logic [$clog2(D_TREE+1)-1:0]       in_leaf_level,
  input  logic [D_TREE-1:0]                 in_leaf_node,
  // outgoing token
  output logic                              out_valid,
  output logic [N_ATTR-1:0][DW-1:0]         out_attrs,
  output logic [$clog2(N_LABEL)-1:0]        out_label,
  output logic [D_TREE-1:0]                 out_node,  // node index within the next level
  output logic                              out_found,
  output logic [$clog2(N_ELEM)-1:0]         out_elem,
  output logic [$clog2(D_TREE+1)-1:0]       out_leaf_level,
  output logic [D_TREE-1:0]                 out_leaf_node,
  // node write port (split pipeline)
  input  logic                              wr_en,
  input  logic [$clog2(D_TREE+1)-1:0]       wr_level,
  input  logic [D_TREE-1:0]                 wr_addr,
  input  logic [1+$clog2(D_TREE+1)+D_TREE+$clog2(N_ATTR)+DW-1:0] wr_data
);
  localparam int LVW   = $clog2(D_TREE + 1);
  localparam int AIW   = $clog2(N_ATTR);
  localparam int EW    = $clog2(N_ELEM);
  localparam int LW    = $clog2(N_LABEL);
  localparam int NW    = 1 + LVW + D_TREE + AIW + DW;
  localparam int NODES = 1 << (LEVEL - 1);
  localparam int MAW   = (LEVEL > 1) ? LEVEL - 1 : 1;

  typedef struct packed {
    logic              ntype;
    logic [LVW-1:0]    level;
    logic [D_TREE-1:0] node_id;
    logic [AIW-1:0]    attr_idx;
    logic [DW-1:0]     split_val;
  } node_t;

  typedef struct packed {
    logic [N_ATTR-1:0][DW-1:0] attrs;
    logic [LW-1:0]             label;
    logic [D_TREE-1:0]         node;
    logic                      found;
    logic [EW-1:0]             elem;
    logic [LVW-1:0]            leaf_level;
    logic [D_TREE-1:0]         leaf_node;
  } token_t;

  node_t  node_rd;
  token_t tok_r, tok_a;
  logic   r_v, a_v;
  node_t  node_a;
  logic [DW-1:0] attr_a;
  logic   wr_here;

  assign wr_here = wr_en && (wr_level == LVW'(LEVEL));

  // ---------------- node storage ----------------
  if (LEVEL == 1) begin : g_root
    node_t root;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) root <= '{ntype: NODE_LEAF, default: '0};
      else if (wr_here) root <= node_t'(wr_data);
    end
    always_ff @(posedge clk) node_rd <= root;
  end else begin : g_mem
    node_t mem [NODES];
    always_ff @(posedge clk) begin
      if (wr_here) mem[wr_addr[MAW-1:0]] <= node_t'(wr_data);
    end
    always_ff @(posedge clk) node_rd <= mem[in_node[MAW-1:0]];
  end

  // ---------------- stage R ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_v <= 1'b0;
    else        r_v <= in_valid;
  end
  always_ff @(posedge clk) begin
    tok_r <= '{attrs: in_attrs, label: in_label, node: in_node, found: in_found,
               elem: in_elem, leaf_level: in_leaf_level, leaf_node: in_leaf_node};
  end

  // ---------------- stage A: attribute selection ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) a_v <= 1'b0;
    else        a_v <= r_v;
  end
  always_ff @(posedge clk) begin
    tok_a            <= tok_r;
    node_a           <= node_rd;
    attr_a           <= (32'(node_rd.attr_idx) < N_ATTR) ? tok_r.attrs[node_rd.attr_idx] : '0;
  end

  // ---------------- stage B: branch decision ----------------
  logic go_left;
  always_comb begin
    if (32'(node_a.attr_idx) < N_NUM) go_left = ($signed(attr_a) <= $signed(node_a.split_val));
    else                              go_left = (attr_a == node_a.split_val);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= a_v;
  end
  always_ff @(posedge clk) begin
    out_attrs <= tok_a.attrs;
    out_label <= tok_a.label;
    if (tok_a.found) begin
      out_found      <= 1'b1;
      out_elem       <= tok_a.elem;
      out_leaf_level <= tok_a.leaf_level;
      out_leaf_node  <= tok_a.leaf_node;
      out_node       <= '0;
    end else if (node_a.ntype == NODE_LEAF) begin
      out_found      <= 1'b1;
      out_elem       <= node_a.split_val[EW-1:0];
      out_leaf_level <= LVW'(LEVEL);
      out_leaf_node  <= tok_a.node;
      out_node       <= '0;
    end else begin
      out_found      <= 1'b0;
      out_elem       <= tok_a.elem;
      out_leaf_level <= tok_a.leaf_level;
      out_leaf_node  <= tok_a.leaf_node;
      out_node       <= {tok_a.node[D_TREE-2:0], ~go_left};
    end
  end
endmodule
