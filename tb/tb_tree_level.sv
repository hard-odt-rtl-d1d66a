// tb_tree_level: one tree level (level 3, four node words) in isolation.
// Random node words are written, then random tokens enter: some already
// found at an earlier level (must pass through unchanged), others
// addressed to one of the four nodes. A leaf node must end the search with
// its element, level 3 and the node index; an internal node must forward
// the token to child 2i (numeric attr <= value, or categorical attr ==
// value) or 2i+1. Outputs must appear 3 cycles after the token, one token
// per cycle.
module tb_tree_level;
  import hodt_pkg::*;
  localparam int LEV = 3, D = 5, NA = 3, NN = 2, NL = 2, NE = 16, NV = 3;
  localparam int LVW = $clog2(D + 1), AIW = $clog2(NA), EW = $clog2(NE);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_found, out_valid, out_found, wr_en;
  logic [NA-1:0][31:0] in_attrs, out_attrs;
  logic [0:0] in_label, out_label;
  logic [D-1:0] in_node, out_node, in_leaf_node, out_leaf_node, wr_addr;
  logic [EW-1:0] in_elem, out_elem;
  logic [LVW-1:0] in_leaf_level, out_leaf_level, wr_level;
  logic [1+LVW+D+AIW+31:0] wr_data;
  int checks = 0, failures = 0, cyc = 0;

  tree_level #(.LEVEL(LEV), .D_TREE(D), .N_ATTR(NA), .N_NUM(NN), .N_LABEL(NL), .N_ELEM(NE)) dut (.*);

  bit          m_int  [4];
  int          m_attr [4];
  logic [31:0] m_val  [4];
  int          m_elem [4];

  typedef struct { logic [NA-1:0][31:0] a; int l; bit f; int e; int lv; int ln; int nd; int c; } exp_t;
  exp_t expq [$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      check(expq.size() > 0, "unexpected output");
      if (expq.size() > 0) begin
        exp_t x;
        x = expq.pop_front();
        check(cyc - x.c == 4, "3-cycle latency");
        check(out_found == x.f, "found flag");
        if (x.f) check(int'(out_elem) == x.e && int'(out_leaf_level) == x.lv && int'(out_leaf_node) == x.ln,
                       "leaf information");
        else     check(int'(out_node) == x.nd, $sformatf("child got %0d exp %0d", out_node, x.nd));
        check(out_attrs == x.a && int'(out_label) == x.l, "sample passed through");
      end
    end
  end

  initial begin
    in_valid = 0; in_attrs = '0; in_label = 0; in_found = 0; in_node = 0; in_elem = 0;
    in_leaf_level = 0; in_leaf_node = 0; wr_en = 0; wr_level = 0; wr_addr = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      for (int nd = 0; nd < 4; nd++) begin
        m_int[nd]  = ($urandom % 3 != 0);
        m_attr[nd] = $urandom % NA;
        m_val[nd]  = (m_attr[nd] < NN) ? 32'($signed($urandom) >>> 1) : 32'($urandom % NV);
        m_elem[nd] = $urandom % NE;
        @(negedge clk);
        wr_en = 1; wr_level = LVW'(LEV); wr_addr = D'(nd);
        if (m_int[nd]) wr_data = {NODE_INTERNAL, LVW'(LEV), D'(nd), AIW'(m_attr[nd]), m_val[nd]};
        else           wr_data = {NODE_LEAF, LVW'(0), D'(0), AIW'(0), 32'(m_elem[nd])};
        @(negedge clk);
        // a write to another level must not land here
        wr_level = LVW'(LEV + 1); wr_data = '1;
        @(negedge clk);
        wr_en = 0;
      end
      for (int t = 0; t < 500; t++) begin
        exp_t x;
        logic [NA-1:0][31:0] a;
        int nd;
        for (int i = 0; i < NN; i++) a[i] = 32'($signed($urandom) >>> 1);
        for (int i = NN; i < NA; i++) a[i] = 32'($urandom % NV);
        nd = $urandom % 4;
        @(negedge clk);
        if ($urandom % 5 == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_attrs = a; in_label = 1'($urandom); in_node = D'(nd);
        in_found = ($urandom % 4 == 0); in_elem = EW'($urandom);
        in_leaf_level = LVW'($urandom_range(1, 2)); in_leaf_node = D'($urandom % 2);
        x.a = a; x.l = int'(in_label); x.c = cyc;
        if (in_found) begin
          x.f = 1; x.e = int'(in_elem); x.lv = int'(in_leaf_level); x.ln = int'(in_leaf_node);
        end else if (!m_int[nd]) begin
          x.f = 1; x.e = m_elem[nd]; x.lv = LEV; x.ln = nd;
        end else begin
          bit left;
          x.f = 0;
          if (m_attr[nd] < NN) left = $signed(a[m_attr[nd]]) <= $signed(m_val[nd]);
          else                 left = a[m_attr[nd]] == m_val[nd];
          x.nd = 2 * nd + (left ? 0 : 1);
        end
        expq.push_back(x);
      end
      @(negedge clk);
      in_valid = 0;
      repeat (6) @(negedge clk);
    end
    check(expq.size() == 0, "all tokens came out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
