// tb_hard_odt_top: end-to-end test of the learning system at reduced size
// (2 numeric + 1 categorical attribute, 2 classes, depth 3, 3 leaf
// elements, n_min = 50).
//
// Phase 0 sends one sample into the idle system and checks the prediction
// latency. Phase 1 streams samples whose labels are independent of the
// attributes: no attribute can win by the Hoeffding bound, so the root
// splits only by the tie rule once the leaf has seen more than
// K/tau^2 = 1382 samples. Phase 2 streams separable data (class 1 when the
// first attribute is positive): the leaves split on that attribute until
// the leaf elements run out, after which further splits are refused.
//
// Checked: every accepted sample produces exactly one prediction, in order
// (the true label travels with it); the number of splits equals the
// elements in use minus one; the accuracy of the last 1000 predictions is
// above 90 %; each mechanism (split trial, split, refusal, tie, both
// forwarding paths of the quantile learners, histogram initialisation and
// input stall) happens at least once. Valid gaps are random.
module tb_hard_odt_top;
  import hodt_pkg::*;
  localparam int NN = 2, NC = 1, NV = 3, NL = 2, NE = 3, D = 3, NMIN = 50;
  localparam int LAT = 3 * D + 3;   // idle prediction latency, accept to pred_valid
  localparam int N_P1 = 1500, N_P2 = 6000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                        in_valid, in_ready;
  logic [NN+NC-1:0][31:0]      in_attrs;
  logic [0:0]                  in_label;
  logic                        pred_valid;
  logic [0:0]                  pred_label, pred_true_label;
  logic [$clog2(NE+1)-1:0]     elems_used;
  logic [31:0] n_trials, n_splits, n_refused, n_ties, n_fwd_c, n_fwd_w, n_hist_init, n_stall_cycles;

  hard_odt_top #(
    .N_NUM(NN), .N_CAT(NC), .N_VAL(NV), .N_LABEL(NL), .N_QUANT(8), .N_ELEM(NE),
    .D_TREE(D), .N_PT(10), .N_MIN(NMIN)
  ) dut (.*);

  int checks = 0, failures = 0;
  int sent = 0, npred = 0, ncorrect_tail = 0, ntail = 0;
  int lab_q [$];
  longint cyc = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: sent %0d predicted %0d", sent, npred);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // prediction monitor
  always @(posedge clk) begin
    if (rst_n && pred_valid) begin
      npred++;
      if (lab_q.size() == 0) check(1'b0, "prediction without a sample");
      else begin
        int l;
        l = lab_q.pop_front();
        if (int'(pred_true_label) != l) check(1'b0, $sformatf("prediction %0d out of order", npred));
      end
      if (npred > N_P1 + N_P2 - 1000) begin
        ntail++;
        if (pred_label == pred_true_label) ncorrect_tail++;
      end
    end
  end

  function automatic logic [31:0] rnd_num();
    return 32'($signed($urandom) >>> 1);   // uniform in [-1, 1) in Q2.30
  endfunction

  // drive one sample, waiting for acceptance
  task automatic send(input bit separable);
    logic [NN+NC-1:0][31:0] a;
    int l;
    for (int i = 0; i < NN; i++) a[i] = rnd_num();
    a[NN] = 32'($urandom % NV);
    if (separable) l = ($signed(a[0]) > 0) ? 1 : 0;
    else           l = $urandom % 2;
    // random idle gap
    while ($urandom % 8 == 0) begin
      @(negedge clk); in_valid = 0;
    end
    @(negedge clk);
    in_valid = 1; in_attrs = a; in_label = 1'(l);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    lab_q.push_back(l);
    sent++;
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    int t0, lat;
    in_valid = 0; in_attrs = '0; in_label = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the training engine clears its element tables after reset
    repeat (NE + 20) @(posedge clk);

    // ---- phase 0: latency of one sample into the idle system ----
    @(negedge clk);
    in_valid = 1; in_attrs = '0; in_label = 1'b0;
    @(posedge clk);
    check(in_ready, "idle system accepts a sample");
    lab_q.push_back(0); sent++;
    t0 = int'(cyc);
    @(negedge clk); in_valid = 0;
    while (!pred_valid) @(posedge clk);
    lat = int'(cyc) - t0;
    check(lat == LAT, $sformatf("idle latency %0d, expected %0d", lat, LAT));
    repeat (5) @(posedge clk);

    // ---- phase 1: unrelated labels, root split by the tie rule ----
    for (int i = 1; i < N_P1; i++) send(1'b0);
    $display("after phase 1: trials %0d splits %0d ties %0d", n_trials, n_splits, n_ties);
    // ---- phase 2: separable data ----
    for (int i = 0; i < N_P2; i++) send(1'b1);
    // drain
    repeat (500) @(posedge clk);

    check(npred == sent, $sformatf("predictions %0d for %0d samples", npred, sent));
    check(n_splits == 32'(elems_used) - 1, "splits == elements in use - 1");
    check(int'(elems_used) <= NE, "elements within capacity");
    check(ntail == 1000, "tail window size");
    check(ncorrect_tail * 10 > ntail * 9,
          $sformatf("tail accuracy %0d/%0d", ncorrect_tail, ntail));
    $display("mechanisms: trials %0d splits %0d refused %0d ties %0d fwd_newer %0d fwd_older %0d hist_init %0d stall_cycles %0d",
             n_trials, n_splits, n_refused, n_ties, n_fwd_c, n_fwd_w, n_hist_init, n_stall_cycles);
    $display("tail accuracy %0d/%0d, elements used %0d", ncorrect_tail, ntail, elems_used);
    check(n_trials   > 0, "split trials happened");
    check(n_splits   > 0, "splits happened");
    check(n_refused  > 0, "refusals happened");
    check(n_ties     > 0, "tie splits happened");
    check(n_fwd_c    > 0, "forwarding from the newer result happened");
    check(n_fwd_w    > 0, "forwarding from the older result happened");
    check(n_hist_init > 0, "histogram initialisations happened");
    check(n_stall_cycles > 0, "input stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
