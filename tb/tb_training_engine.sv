// tb_training_engine: the training engine with the testbench acting as the
// split controller (2 numeric + 1 categorical attribute, 2 classes,
// n_min = 100).
//   1. Element 0 (the root) receives n_min samples whose class is set by
//      the sign of attribute 0 (attribute 1 and the categorical one are
//      noise). The input must stall right after the n_min-th sample, and
//      a split request must follow for element 0, level 1, node 0, on
//      attribute 0 with a split value near 0. The responder accepts it
//      with the pairs (level 2, node 0, element 0) and (level 2, node 1,
//      element 1); both elements must then be cleared in the inference
//      engine and the histogram learner, and the input must reopen.
//   2. Element 1 receives n_min samples with random classes: a trial must
//      run and end without a request (the bound is not met at n = 100).
//   3. Element 0 receives n_min separable samples on attribute 1 this time:
//      the request must name level 2, node 0 (the table written by step 1)
//      and attribute 1; the responder refuses it, which must be counted.
//   4. Element 1 receives samples separable on the categorical attribute
//      (class 1 exactly when its value is 2): the request must name
//      attribute 2 with value 2.
//   5. A sample offered during a trial must wait (stall cycles counted).
// Forwarding counts of the quantile learners must be non-zero (samples to
// one element arrive back to back).
module tb_training_engine;
  import hodt_pkg::*;
  localparam int NN = 2, NC = 1, NV = 4, NL = 2, NE = 8, D = 4, NMIN = 100;
  localparam int EW = $clog2(NE), LVW = $clog2(D + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready;
  logic [EW-1:0] in_elem;
  logic [0:0] in_label;
  logic [NN+NC-1:0][31:0] in_attrs;
  logic sreq_valid, sreq_ready, sresp_valid, sresp_accept;
  logic [EW-1:0] sreq_elem, sresp_elem_l, sresp_elem_r;
  logic [LVW-1:0] sreq_level, sresp_level;
  logic [D-1:0] sreq_node, sresp_node_l, sresp_node_r;
  logic [1:0] sreq_attr;
  logic [31:0] sreq_val;
  logic inf_init_valid;
  logic [EW-1:0] inf_init_elem;
  logic [31:0] n_trials, n_splits, n_refused, n_ties, n_fwd_c, n_fwd_w, n_hist_init, n_stall_cycles;
  int checks = 0, failures = 0;
  int nreq = 0;
  bit accept_next = 1;
  bit inf_cleared [NE];

  training_engine #(
    .N_NUM(NN), .N_CAT(NC), .N_VAL(NV), .N_LABEL(NL), .N_QUANT(8), .N_ELEM(NE),
    .D_TREE(D), .N_PT(10), .N_MIN(NMIN)
  ) dut (.*);

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

  // split controller stand-in: answers two cycles after a request
  logic [EW-1:0] rq_elem;
  logic [LVW-1:0] rq_level;
  logic [D-1:0] rq_node;
  logic [1:0] rq_attr;
  logic [31:0] rq_val;
  assign sreq_ready = 1'b1;
  initial begin
    sresp_valid = 0; sresp_accept = 0; sresp_level = 0; sresp_node_l = 0; sresp_node_r = 0;
    sresp_elem_l = 0; sresp_elem_r = 0;
    forever begin
      @(posedge clk);
      if (sreq_valid) begin
        rq_elem = sreq_elem; rq_level = sreq_level; rq_node = sreq_node;
        rq_attr = sreq_attr; rq_val = sreq_val;
        nreq++;
        @(negedge clk);
        sresp_valid = 1; sresp_accept = accept_next;
        sresp_level = rq_level + 1'b1; sresp_node_l = {rq_node[D-2:0], 1'b0};
        sresp_node_r = {rq_node[D-2:0], 1'b1};
        sresp_elem_l = rq_elem; sresp_elem_r = EW'(nreq);
        @(negedge clk);
        sresp_valid = 0;
      end
    end
  end

  always @(posedge clk) if (inf_init_valid) inf_cleared[inf_init_elem] = 1;

  function automatic logic [31:0] rnd_num();
    return 32'($signed($urandom) >>> 1);
  endfunction

  // send n samples to element e; mode 0: class by attr 0, 1: random,
  // 2: class by attr 1, 3: class by the categorical value == 2
  task automatic send_block(input int e, input int mode, input int n);
    for (int i = 0; i < n; i++) begin
      logic [NN+NC-1:0][31:0] a;
      int l;
      a[0] = rnd_num(); a[1] = rnd_num(); a[2] = 32'($urandom % NV);
      case (mode)
        0: l = ($signed(a[0]) > 0);
        1: l = $urandom % 2;
        2: l = ($signed(a[1]) > 0);
        default: l = (a[2] == 2);
      endcase
      @(negedge clk);
      if (i > 0) check(in_ready, "no stall before n_min");
      while (!in_ready) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_elem = EW'(e); in_label = 1'(l); in_attrs = a;
    end
    // the last sample of the block starts a trial: the input stalls
    @(negedge clk);
    in_valid = 0;
    check(!in_ready, "input stalls after the n_min-th sample");
  endtask

  task automatic wait_idle();
    int t;
    t = 0;
    while (!in_ready && t < 2000) begin @(negedge clk); t++; end
    check(in_ready, "trial ends");
  endtask

  initial begin
    int r0;
    in_valid = 0; in_elem = 0; in_label = 0; in_attrs = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait_idle();
    check(inf_cleared[0], "element 0 cleared after reset");

    // 1. split of the root on attribute 0
    for (int e = 0; e < NE; e++) inf_cleared[e] = 0;
    accept_next = 1;
    send_block(0, 0, NMIN);
    wait_idle();
    check(nreq == 1, "one split request");
    check(rq_elem == 0 && rq_level == 1 && rq_node == 0, "request names the root");
    check(rq_attr == 0, $sformatf("split attribute %0d, expected 0", rq_attr));
    check($signed(rq_val) > -32'sd268435456 && $signed(rq_val) < 32'sd268435456,
          $sformatf("split value %f near 0", real'($signed(rq_val)) / 2.0 ** 30));
    check(n_splits == 1 && n_trials == 1, "split counted");
    check(inf_cleared[0] && inf_cleared[1], "both new leaves cleared in the inference engine");
    check(n_hist_init >= 2, "histograms initialised");

    // 2. no split on random classes
    r0 = nreq;
    send_block(1, 1, NMIN);
    wait_idle();
    check(nreq == r0, "no request on random classes");
    check(n_trials == 2, "second trial counted");

    // 3. refused split of element 0 (now level 2, node 0) on attribute 1
    accept_next = 0;
    send_block(0, 2, NMIN);
    wait_idle();
    check(nreq == r0 + 1, "request on attribute 1");
    check(rq_elem == 0 && rq_level == 2 && rq_node == 0, "request uses the node-element table");
    check(rq_attr == 1, $sformatf("split attribute %0d, expected 1", rq_attr));
    check(n_refused == 1, "refusal counted");

    // 4. categorical split of element 1 (level 2, node 1)
    accept_next = 1;
    r0 = nreq;
    for (int k = 0; k < 4 && nreq == r0; k++) begin
      send_block(1, 3, NMIN);
      wait_idle();
    end
    check(nreq == r0 + 1, "categorical split requested");
    check(rq_elem == 1 && rq_level == 2 && rq_node == 1, "request for element 1");
    check(rq_attr == 2 && rq_val == 2, $sformatf("categorical split attr %0d value %0d", rq_attr, rq_val));
    check(n_fwd_c > 0 && n_fwd_w > 0, "quantile forwarding used");
    // 5. a sample offered during a trial waits with valid held high
    send_block(3, 1, NMIN);
    in_valid = 1; in_elem = 3; in_label = 0; in_attrs = '0;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
    check(n_stall_cycles > 0, "stall cycles counted");
    $display("trials %0d splits %0d refused %0d ties %0d fwd %0d/%0d hist_init %0d stalls %0d",
             n_trials, n_splits, n_refused, n_ties, n_fwd_c, n_fwd_w, n_hist_init, n_stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
