// tb_hoeffding_judge: random candidate sets against a real-arithmetic
// model of the Hoeffding test. The model takes the no-split quality
// SQ_0 = sum n_j^2 / n, the best and second-best quality over SQ_0 and the
// valid candidates, G difference D/n, eps = sqrt(K/n) with
// K = ln(1000)/2, and decides: split when the best is a real attribute and
// D/n > eps (Hoeffding) or eps < tau = 0.05 (tie). Cases within 1 % of a
// decision boundary are skipped (the unit uses fixed-point arithmetic).
// The split attribute and value and the 3-cycle done latency are checked.
module tb_hoeffding_judge;
  import hodt_pkg::*;
  localparam int NA = 4, NL = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, split, tie;
  logic [NA-1:0] cand_valid;
  logic [NA-1:0][31:0] cand_sq, cand_val;
  logic [NL-1:0][15:0] n_cls;
  logic [15:0] n_total;
  logic [1:0] split_attr;
  logic [31:0] split_val;
  int checks = 0, failures = 0, cyc = 0, nsplit = 0, ntie = 0, nskip = 0;

  hoeffding_judge #(.N_ATTR(NA), .N_LABEL(NL)) dut (.*);

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
  always @(posedge clk) cyc++;

  initial begin
    real kk;
    kk = $ln(1000.0) / 2.0;
    start = 0; cand_valid = '0; cand_sq = '0; cand_val = '0; n_cls = '0; n_total = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      real n, sq0, b1, b2, eps, g, margin;
      int ba, c0;
      bit real_best, exp_split, exp_tie, skip;
      @(negedge clk);
      n_cls[0] = 16'($urandom_range(1, (t % 3 == 0) ? 3000 : 600));
      n_cls[1] = 16'($urandom_range(1, (t % 3 == 0) ? 3000 : 600));
      n_total  = n_cls[0] + n_cls[1];
      n = real'(n_total);
      sq0 = (real'(n_cls[0]) ** 2 + real'(n_cls[1]) ** 2) / n;
      b1 = sq0; b2 = sq0; ba = -1;
      for (int i = 0; i < NA; i++) begin
        real v;
        cand_valid[i] = ($urandom % 5 != 0);
        // qualities between SQ_0 and n (a pure split), some below SQ_0
        v = sq0 + (n - sq0) * real'($urandom_range(0, 1000)) / 1000.0 * ((t % 4 == 0) ? 1.0 : 0.1)
            - ((i == 3) ? sq0 * 0.01 : 0.0);
        cand_sq[i] = 32'(longint'(v * 4096.0));
        cand_val[i] = $urandom;
        v = real'(cand_sq[i]) / 4096.0;
        if (cand_valid[i]) begin
          if (v > b1) begin b2 = b1; b1 = v; ba = i; end
          else if (v > b2) b2 = v;
        end
      end
      real_best = (ba >= 0);
      eps = $sqrt(kk / n);
      g = (b1 - b2) / n;
      exp_split = real_best && (g > eps || eps < 0.05);
      exp_tie   = real_best && !(g > eps) && eps < 0.05;
      margin = (g - eps) / eps;
      skip = (margin < 0.01 && margin > -0.01) || ((eps - 0.05) / 0.05 < 0.01 && (eps - 0.05) / 0.05 > -0.01);
      // near-equal qualities: the fixed-point SQ_0 may order differently
      for (int i = 0; i < NA; i++)
        if (cand_valid[i] && real'(cand_sq[i]) / 4096.0 - sq0 < sq0 / 256.0 + 0.01 &&
            sq0 - real'(cand_sq[i]) / 4096.0 < sq0 / 256.0 + 0.01) skip = 1;
      start = 1;
      c0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      check(cyc - c0 == 3, $sformatf("done after %0d cycles", cyc - c0));
      if (skip) begin nskip++; continue; end
      check(split == exp_split, $sformatf("split %0d exp %0d (n %0d, G diff %f, eps %f)", split, exp_split, n_total, g, eps));
      check(tie == exp_tie, $sformatf("tie %0d exp %0d", tie, exp_tie));
      if (exp_split) begin
        check(int'(split_attr) == ba, $sformatf("split attribute %0d exp %0d", split_attr, ba));
        check(split_val == cand_val[ba], "split value");
      end
      if (exp_split) nsplit++;
      if (exp_tie) ntie++;
    end
    $display("splits %0d ties %0d skipped %0d", nsplit, ntie, nskip);
    check(nsplit > 100 && ntie > 10, "both decisions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
