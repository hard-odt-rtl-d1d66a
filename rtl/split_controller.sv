// split_controller: turns a split decision into tree node writes and new
// leaf node-element pairs.
//
// A request names the leaf to split (level, node index), the element that
// trained it, and the chosen attribute index and split value. The split is
// refused when the leaf is already at the maximum depth or no element is
// free. Otherwise the controller allocates one fresh element, keeps the
// parent's element for the left child (as in the original's allocation
// example, where the split leaf's element E3 is handed to the first new
// leaf and E4 is newly taken), and performs three node writes on
// consecutive cycles, one per step of the S, N, N split sequence:
//   S  the parent leaf becomes an internal node {1, level, node, attr, val};
//   N  left child  (level+1, 2*node)   becomes a leaf bound to the old element;
//   N  right child (level+1, 2*node+1) becomes a leaf bound to the new element.
// In the next cycle resp_valid pulses with resp_accept and the two new
// pairs, which the training engine writes into its node-element table.
// A refused request answers one cycle after it is taken.
//
// Elements are handed out in increasing order and never returned: every
// split turns one leaf into two, so the number of leaves equals the number
// of elements in use (this design's choice of a simple allocator).
module split_controller
  import hodt_pkg::*;
#(
  parameter int D_TREE = 15,
  parameter int N_ATTR = 8,
  parameter int N_ELEM = 1024
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                        req_valid,
  output logic                        req_ready,
  input  logic [$clog2(N_ELEM)-1:0]   req_elem,
  input  logic [$clog2(D_TREE+1)-1:0] req_level,
  input  logic [D_TREE-1:0]           req_node,
  input  logic [$clog2(N_ATTR)-1:0]   req_attr,
  input  logic [DW-1:0]               req_val,
  output logic                        resp_valid,
  output logic                        resp_accept,
  output logic [$clog2(D_TREE+1)-1:0] resp_level,     // level of both children
  output logic [D_TREE-1:0]           resp_node_l,
  output logic [$clog2(N_ELEM)-1:0]   resp_elem_l,
  output logic [D_TREE-1:0]           resp_node_r,
  output logic [$clog2(N_ELEM)-1:0]   resp_elem_r,
  output logic                        wr_en,
  output logic [$clog2(D_TREE+1)-1:0] wr_level,
  output logic [D_TREE-1:0]           wr_addr,
  output logic [1+$clog2(D_TREE+1)+D_TREE+$clog2(N_ATTR)+DW-1:0] wr_data,
  output logic [$clog2(N_ELEM+1)-1:0] elems_used
);
  localparam int LVW = $clog2(D_TREE + 1);
  localparam int AIW = $clog2(N_ATTR);
  localparam int EW  = $clog2(N_ELEM);

  typedef enum logic [2:0] {S_IDLE, S_SPLIT, S_NOP1, S_NOP2, S_RESP, S_REFUSE} state_e;
  state_e state;

  logic [EW-1:0]     r_elem, r_new;
  logic [LVW-1:0]    r_level;
  logic [D_TREE-1:0] r_node;
  logic [AIW-1:0]    r_attr;
  logic [DW-1:0]     r_val;
  logic              can_split;

  assign req_ready = (state == S_IDLE);
  assign can_split = (32'(req_level) < D_TREE) && (32'(elems_used) < N_ELEM);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      elems_used <= 1;           // element 0 belongs to the root leaf
      r_elem <= '0; r_new <= '0; r_level <= '0; r_node <= '0; r_attr <= '0; r_val <= '0;
    end else begin
      case (state)
        S_IDLE: if (req_valid) begin
          r_elem  <= req_elem;
          r_level <= req_level;
          r_node  <= req_node;
          r_attr  <= req_attr;
          r_val   <= req_val;
          if (can_split) begin
            r_new      <= elems_used[EW-1:0];
            elems_used <= elems_used + 1'b1;
            state      <= S_SPLIT;
          end else begin
            state <= S_REFUSE;
          end
        end
        S_SPLIT:  state <= S_NOP1;
        S_NOP1:   state <= S_NOP2;
        S_NOP2:   state <= S_RESP;
        S_RESP:   state <= S_IDLE;
        S_REFUSE: state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  // node write bus
  always_comb begin
    wr_en    = 1'b0;
    wr_level = r_level;
    wr_addr  = r_node;
    wr_data  = '0;
    case (state)
      S_SPLIT: begin
        wr_en   = 1'b1;
        wr_data = {NODE_INTERNAL, r_level, r_node, r_attr, r_val};
      end
      S_NOP1: begin
        wr_en    = 1'b1;
        wr_level = r_level + 1'b1;
        wr_addr  = {r_node[D_TREE-2:0], 1'b0};
        wr_data  = {NODE_LEAF, LVW'(0), D_TREE'(0), AIW'(0), DW'(r_elem)};
      end
      S_NOP2: begin
        wr_en    = 1'b1;
        wr_level = r_level + 1'b1;
        wr_addr  = {r_node[D_TREE-2:0], 1'b1};
        wr_data  = {NODE_LEAF, LVW'(0), D_TREE'(0), AIW'(0), DW'(r_new)};
      end
      default: ;
    endcase
  end

  assign resp_valid  = (state == S_RESP) || (state == S_REFUSE);
  assign resp_accept = (state == S_RESP);
  assign resp_level  = r_level + 1'b1;
  assign resp_node_l = {r_node[D_TREE-2:0], 1'b0};
  assign resp_node_r = {r_node[D_TREE-2:0], 1'b1};
  assign resp_elem_l = r_elem;
  assign resp_elem_r = r_new;
endmodule
