// tb_split_controller: random split requests (levels across the whole
// depth, random nodes, attributes and values) against a model of the
// allocator. An accepted request must produce, on the three cycles after
// it is taken, the writes S (parent becomes internal {1, level, node,
// attr, value}), N (left child 2*node at level+1, leaf bound to the
// parent's element) and N (right child 2*node+1, leaf bound to the next
// fresh element), then one response cycle with the two new pairs. A
// request at the maximum depth or with no free element must be refused in
// the cycle after it is taken, without writes.
module tb_split_controller;
  import hodt_pkg::*;
  localparam int D = 4, NA = 4, NE = 8;
  localparam int LVW = $clog2(D + 1), EW = $clog2(NE), AIW = $clog2(NA);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, resp_valid, resp_accept, wr_en;
  logic [EW-1:0] req_elem, resp_elem_l, resp_elem_r;
  logic [LVW-1:0] req_level, resp_level, wr_level;
  logic [D-1:0] req_node, resp_node_l, resp_node_r, wr_addr;
  logic [AIW-1:0] req_attr;
  logic [31:0] req_val;
  logic [1+LVW+D+AIW+31:0] wr_data;
  logic [$clog2(NE+1)-1:0] elems_used;
  int checks = 0, failures = 0, nacc = 0, nref = 0;

  split_controller #(.D_TREE(D), .N_ATTR(NA), .N_ELEM(NE)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int used;
    req_valid = 0; req_elem = 0; req_level = 0; req_node = 0; req_attr = 0; req_val = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 40; round++) begin
      // reset between rounds so the element pool runs out many times
      @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
      used = 1;
      for (int t = 0; t < 12; t++) begin
        int lv, nd, el, at;
        bit ok;
        lv = $urandom_range(1, D);
        nd = $urandom % (1 << (lv - 1));
        el = $urandom % NE; at = $urandom % NA;
        @(negedge clk);
        check(req_ready && !wr_en && !resp_valid, "idle before request");
        check(int'(elems_used) == used, "elements in use");
        req_valid = 1; req_level = LVW'(lv); req_node = D'(nd); req_elem = EW'(el);
        req_attr = AIW'(at); req_val = $urandom;
        ok = (lv < D) && (used < NE);
        @(negedge clk);
        req_valid = 0;
        if (ok) begin
          // S
          check(wr_en && int'(wr_level) == lv && int'(wr_addr) == nd &&
                wr_data == {NODE_INTERNAL, LVW'(lv), D'(nd), AIW'(at), req_val}, "S write");
          check(!resp_valid && !req_ready, "busy during writes");
          @(negedge clk);
          check(wr_en && int'(wr_level) == lv + 1 && int'(wr_addr) == 2 * nd &&
                wr_data == {NODE_LEAF, LVW'(0), D'(0), AIW'(0), 32'(el)}, "left N write");
          @(negedge clk);
          check(wr_en && int'(wr_level) == lv + 1 && int'(wr_addr) == 2 * nd + 1 &&
                wr_data == {NODE_LEAF, LVW'(0), D'(0), AIW'(0), 32'(used)}, "right N write");
          @(negedge clk);
          check(!wr_en && resp_valid && resp_accept, "accepted response");
          check(int'(resp_level) == lv + 1 && int'(resp_node_l) == 2 * nd &&
                int'(resp_node_r) == 2 * nd + 1 && int'(resp_elem_l) == el &&
                int'(resp_elem_r) == used, "response pairs");
          used++;
          nacc++;
        end else begin
          check(!wr_en && resp_valid && !resp_accept, "refusal");
          nref++;
        end
      end
    end
    $display("accepted %0d refused %0d", nacc, nref);
    check(nacc > 100 && nref > 50, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
