// tb_tree_pipeline: a random tree of depth D is written through the node
// write port (internal nodes with random attribute and split value, leaves
// bound to random elements, every node at the last level a leaf), then
// random samples stream through at one per cycle with random gaps. A
// reference model walks the same tree (numeric attribute: left when
// attr <= value, signed; categorical: left when attr == value; child 2i or
// 2i+1 at the next level). Each output must carry the model's leaf
// element, leaf level and leaf node, the sample's attributes and label,
// and appear 3*D cycles after the sample entered. The tree is then
// rewritten and the test repeated.
module tb_tree_pipeline;
  import hodt_pkg::*;
  localparam int D = 4, NA = 3, NN = 2, NL = 2, NE = 16, NV = 3;
  localparam int LVW = $clog2(D + 1), AIW = $clog2(NA), EW = $clog2(NE);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid, out_found, wr_en;
  logic [NA-1:0][31:0] in_attrs, out_attrs;
  logic [0:0] in_label, out_label;
  logic [EW-1:0] out_elem;
  logic [LVW-1:0] out_leaf_level, wr_level;
  logic [D-1:0] out_leaf_node, wr_addr;
  logic [1+LVW+D+AIW+31:0] wr_data;
  int checks = 0, failures = 0, cyc = 0;
  int nleaf_lv [D+1];

  tree_pipeline #(.D_TREE(D), .N_ATTR(NA), .N_NUM(NN), .N_LABEL(NL), .N_ELEM(NE)) dut (.*);

  // model tree
  bit          m_int  [D+1][1 << D];
  int          m_attr [D+1][1 << D];
  logic [31:0] m_val  [D+1][1 << D];
  int          m_elem [D+1][1 << D];

  typedef struct { logic [NA-1:0][31:0] a; int l; int e; int lv; int nd; int c; } exp_t;
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
        // entered after edge c, taken at edge c+1, out after edge c+3D
        check(cyc - x.c == 3 * D + 1, $sformatf("latency %0d", cyc - x.c - 1));
        check(out_found, "leaf found");
        check(int'(out_elem) == x.e && int'(out_leaf_level) == x.lv && int'(out_leaf_node) == x.nd,
              $sformatf("leaf got e%0d l%0d n%0d exp e%0d l%0d n%0d", out_elem, out_leaf_level,
                        out_leaf_node, x.e, x.lv, x.nd));
        check(out_attrs == x.a && int'(out_label) == x.l, "sample passed through");
      end
    end
  end

  task automatic write_node(input int lv, input int nd);
    @(negedge clk);
    wr_en = 1; wr_level = LVW'(lv); wr_addr = D'(nd);
    if (m_int[lv][nd]) wr_data = {NODE_INTERNAL, LVW'(lv), D'(nd), AIW'(m_attr[lv][nd]), m_val[lv][nd]};
    else               wr_data = {NODE_LEAF, LVW'(0), D'(0), AIW'(0), 32'(m_elem[lv][nd])};
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic build_tree();
    for (int lv = 1; lv <= D; lv++)
      for (int nd = 0; nd < (1 << (lv - 1)); nd++) begin
        m_int[lv][nd]  = (lv < D) && ($urandom % 4 != 0);
        m_attr[lv][nd] = $urandom % NA;
        m_val[lv][nd]  = (m_attr[lv][nd] < NN) ? 32'($signed($urandom) >>> 1) : 32'($urandom % NV);
        m_elem[lv][nd] = $urandom % NE;
        write_node(lv, nd);
      end
  endtask

  function automatic exp_t walk(input logic [NA-1:0][31:0] a);
    exp_t x;
    int nd;
    nd = 0;
    for (int lv = 1; lv <= D; lv++) begin
      if (!m_int[lv][nd]) begin
        x.e = m_elem[lv][nd]; x.lv = lv; x.nd = nd;
        return x;
      end
      if (m_attr[lv][nd] < NN) nd = 2 * nd + (($signed(a[m_attr[lv][nd]]) <= $signed(m_val[lv][nd])) ? 0 : 1);
      else                     nd = 2 * nd + ((a[m_attr[lv][nd]] == m_val[lv][nd]) ? 0 : 1);
    end
    return x;
  endfunction

  initial begin
    in_valid = 0; in_attrs = '0; in_label = 0; wr_en = 0; wr_level = 0; wr_addr = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 10; round++) begin
      build_tree();
      for (int t = 0; t < 1000; t++) begin
        exp_t x;
        logic [NA-1:0][31:0] a;
        for (int i = 0; i < NN; i++) a[i] = 32'($signed($urandom) >>> 1);
        for (int i = NN; i < NA; i++) a[i] = 32'($urandom % NV);
        @(negedge clk);
        if ($urandom % 5 == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_attrs = a; in_label = 1'($urandom);
        x = walk(a);
        x.a = a; x.l = int'(in_label); x.c = cyc;
        nleaf_lv[x.lv]++;
        expq.push_back(x);
      end
      @(negedge clk);
      in_valid = 0;
      repeat (3 * D + 5) @(negedge clk);
    end
    check(expq.size() == 0, "all samples came out");
    for (int lv = 2; lv <= D; lv++) check(nleaf_lv[lv] > 0, $sformatf("leaves reached at level %0d", lv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
