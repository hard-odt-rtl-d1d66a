// tb_hard_odt_full: the learning system at its default size (7 numeric and
// 1 categorical attribute with 7 values, 2 classes, 8 quantiles, 10 split
// points, n_min = 200, depth 15, 1024 leaf elements), with no parameter
// overrides. It streams 4000 samples of a separable concept (class 1 when
// the first attribute is positive; the other attributes are noise) and
// checks that every accepted sample yields one prediction in order, that
// the idle prediction latency is 3*15+3 = 48 cycles, that the tree splits,
// that splits equal new elements, and that the last 1000 predictions are
// more than 90 % correct.
module tb_hard_odt_full;
  import hodt_pkg::*;
  localparam int NN = 7, NC = 1, NV = 7, NE = 1024, D = 15;
  localparam int LAT = 3 * D + 3;
  localparam int N_P1 = 1, N_P2 = 4000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                        in_valid, in_ready;
  logic [NN+NC-1:0][31:0]      in_attrs;
  logic [0:0]                  in_label;
  logic                        pred_valid;
  logic [0:0]                  pred_label, pred_true_label;
  logic [$clog2(NE+1)-1:0]     elems_used;
  logic [31:0] n_trials, n_splits, n_refused, n_ties, n_fwd_c, n_fwd_w, n_hist_init, n_stall_cycles;

  hard_odt_top dut (.*);

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

    // ---- separable data ----
    for (int i = 0; i < N_P2; i++) send(1'b1);
    // drain
    repeat (500) @(posedge clk);

    check(npred == sent, $sformatf("predictions %0d for %0d samples", npred, sent));
    check(n_splits == 32'(elems_used) - 1, "splits == elements in use - 1");
    check(int'(elems_used) <= NE, "elements within capacity");
    check(ntail == 1000, "tail window size");
    check(ncorrect_tail * 10 > ntail * 9,
          $sformatf("tail accuracy %0d/%0d", ncorrect_tail, ntail));
    check(n_splits > 0, "the tree split");
    $display("mechanisms: trials %0d splits %0d refused %0d ties %0d fwd_newer %0d fwd_older %0d hist_init %0d stall_cycles %0d",
             n_trials, n_splits, n_refused, n_ties, n_fwd_c, n_fwd_w, n_hist_init, n_stall_cycles);
    $display("tail accuracy %0d/%0d, elements used %0d", ncorrect_tail, ntail, elems_used);
    check(n_trials   > 0, "split trials happened");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
