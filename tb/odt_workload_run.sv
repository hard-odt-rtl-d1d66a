// odt_workload_run: drives one full-depth learning system (depth 15, 1024
// leaves, 8 quantiles, 10 split points, n_min = 200) configured with a
// data set's attribute mix, and reports its own check counts.
//
// The data are synthetic: numeric attributes uniform in [-1, 1),
// categorical values uniform, and the class is attribute 0 cut into
// N_LABEL equal bands, so the tree must split on attribute 0 repeatedly
// (N_LABEL - 1 times to separate every band). Checks: every accepted
// sample gives one prediction in order, the tree splits at least
// N_LABEL / 2 times within the run, and the last 1000 predictions reach MIN_ACC_PCT percent.
// done rises when the run is over; checks and failures are then final.
module odt_workload_run #(
  parameter int N_NUM = 7,
  parameter int N_CAT = 1,
  parameter int N_VAL = 7,
  parameter int N_LABEL = 2,
  parameter int N_SAMP = 4000,
  parameter int MIN_ACC_PCT = 85
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int NA = N_NUM + N_CAT;
  localparam int LW = $clog2(N_LABEL);

  logic                  in_valid, in_ready;
  logic [NA-1:0][31:0]   in_attrs;
  logic [LW-1:0]         in_label;
  logic                  pred_valid;
  logic [LW-1:0]         pred_label, pred_true_label;
  logic [10:0]           elems_used;
  logic [31:0] n_trials, n_splits, n_refused, n_ties, n_fwd_c, n_fwd_w, n_hist_init, n_stall_cycles;

  hard_odt_top #(.N_NUM(N_NUM), .N_CAT(N_CAT), .N_VAL(N_VAL), .N_LABEL(N_LABEL)) dut (.*);

  int sent = 0, npred = 0, ntail = 0, ncorrect = 0;
  int lab_q [$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [%0d/%0d/%0d]: %s", N_NUM, N_CAT, N_LABEL, msg);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && pred_valid) begin
      npred++;
      if (lab_q.size() == 0) check(1'b0, "prediction without a sample");
      else if (int'(pred_true_label) != lab_q.pop_front()) check(1'b0, "prediction out of order");
      if (npred > N_SAMP - 1000) begin
        ntail++;
        if (pred_label == pred_true_label) ncorrect++;
      end
    end
  end

  initial begin
    done = 0; checks = 0; failures = 0;
    in_valid = 0; in_attrs = '0; in_label = '0;
    @(posedge rst_n);
    repeat (1100) @(posedge clk);
    for (int i = 0; i < N_SAMP; i++) begin
      logic [NA-1:0][31:0] a;
      int l;
      longint u;
      for (int k = 0; k < N_NUM; k++) a[k] = 32'($signed($urandom) >>> 1);
      for (int k = N_NUM; k < NA; k++) a[k] = 32'($urandom % N_VAL);
      u = longint'($signed(a[0])) + (longint'(1) << 30);     // 0 .. 2^31-1
      l = int'((u * N_LABEL) >> 31);
      @(negedge clk);
      in_valid = 1; in_attrs = a; in_label = LW'(l);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      lab_q.push_back(l);
      sent++;
      @(negedge clk);
      in_valid = 0;
    end
    repeat (500) @(posedge clk);
    check(npred == sent, $sformatf("predictions %0d for %0d samples", npred, sent));
    check(int'(n_splits) >= N_LABEL / 2, $sformatf("splits %0d", n_splits));
    check(n_splits == 32'(elems_used) - 1, "splits == elements in use - 1");
    check(ncorrect * 100 >= ntail * MIN_ACC_PCT, $sformatf("tail accuracy %0d/%0d", ncorrect, ntail));
    $display("workload N=%0d C=%0d L=%0d: %0d samples, splits %0d, trials %0d, stalls %0d, tail accuracy %0d/%0d",
             N_NUM, N_CAT, N_LABEL, sent, n_splits, n_trials, n_stall_cycles, ncorrect, ntail);
    done = 1;
  end
endmodule
