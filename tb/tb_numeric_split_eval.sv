// tb_numeric_split_eval: random quantile sets, ranges and class counts.
// The reference forms the N_PT split points
// pt_p = min + floor((max - min) * p / (N_PT + 1)), deduces the partition
// left_j = floor(k_j * n_j / N_QUANT) with k_j the class-j quantiles below
// pt_p, and takes the exact Gini split quality of each point. The unit's
// best_sq must be within 2^-8 (relative) of the maximum, its best_pt must
// be one of the points (1 LSB allowed) and have a quality within 2^-7 of
// the maximum. An empty range (max < min) must give best_valid = 0. done
// must follow start by N_PT + 3 cycles.
module tb_numeric_split_eval;
  import hodt_pkg::*;
  localparam int NQ = 8, NL = 2, NP = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, best_valid;
  logic [NL-1:0][NQ-1:0][31:0] q;
  logic [31:0] min_val, max_val;
  logic [NL-1:0][15:0] n_cls;
  logic [31:0] best_sq, best_pt;
  int checks = 0, failures = 0, cyc = 0;

  numeric_split_eval #(.N_QUANT(NQ), .N_LABEL(NL), .N_PT(NP)) dut (.*);

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

  function automatic longint pt_of(input int p);
    return longint'($signed(min_val)) +
           ((longint'($signed(max_val)) - longint'($signed(min_val))) * p) / (NP + 1);
  endfunction

  function automatic real sq_at(input longint pt);
    real sl, sr, ql, qr, e;
    sl = 0; sr = 0; ql = 0; qr = 0;
    for (int j = 0; j < NL; j++) begin
      int k;
      real l, r;
      k = 0;
      for (int i = 0; i < NQ; i++) if (longint'($signed(q[j][i])) < pt) k++;
      l = real'((longint'(k) * longint'(n_cls[j])) / NQ);
      r = real'(n_cls[j]) - l;
      sl += l; sr += r; ql += l * l; qr += r * r;
    end
    e = 0;
    if (sl > 0) e += ql / sl;
    if (sr > 0) e += qr / sr;
    return e;
  endfunction

  function automatic logic [31:0] rnd_between(input longint lo, input longint hi);
    return 32'(lo + longint'($urandom) % (hi - lo + 1));
  endfunction

  initial begin
    start = 0; q = '0; min_val = '0; max_val = '0; n_cls = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      real best, got, picked;
      int c0, bp;
      longint lo, hi;
      bit empty;
      empty = (t % 10 == 9);
      lo = longint'($signed(32'($signed($urandom) >>> 1)));
      hi = lo + longint'($urandom_range(1, 1 << 30));
      if (hi > 32'sh7fffffff) hi = 32'sh7fffffff;
      @(negedge clk);
      min_val = 32'(lo); max_val = 32'(hi);
      if (empty) begin min_val = 32'(hi); max_val = 32'(lo); end
      for (int j = 0; j < NL; j++) begin
        // class j's quantiles concentrated in a random sub-range
        longint a, b, c;
        a = longint'($signed(rnd_between(lo, hi)));
        b = longint'($signed(rnd_between(lo, hi)));
        if (a > b) begin c = a; a = b; b = c; end
        for (int i = 0; i < NQ; i++) q[j][i] = rnd_between(a, b);
        n_cls[j] = 16'($urandom_range(1, (t % 2) ? 300 : 20000));
      end
      start = 1;
      c0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      check(cyc - c0 == NP + 3, $sformatf("done after %0d cycles", cyc - c0));
      if (empty) begin
        check(!best_valid, "empty range gives no candidate");
        continue;
      end
      best = 0;
      for (int p = 1; p <= NP; p++) if (sq_at(pt_of(p)) > best) best = sq_at(pt_of(p));
      got = real'(best_sq) / 4096.0;
      check(best_valid, "best_valid");
      check(got - best <= best / 256.0 + 0.01 && best - got <= best / 256.0 + 0.01,
            $sformatf("best sq got %f exp %f", got, best));
      if (!(got - best <= best / 256.0 + 0.01 && best - got <= best / 256.0 + 0.01)) begin
        $display("min %0d max %0d n %0d %0d", $signed(min_val), $signed(max_val), n_cls[0], n_cls[1]);
        for (int p = 1; p <= NP; p++) $display(" p%0d pt %0d sq %f", p, pt_of(p), sq_at(pt_of(p)));
        for (int j = 0; j < NL; j++) for (int i = 0; i < NQ; i++) $display(" q%0d%0d %0d", j, i, $signed(q[j][i]));
        $display(" best_pt %0d", $signed(best_pt));
      end
      bp = 0;
      for (int p = 1; p <= NP; p++) begin
        longint dlt;
        dlt = longint'($signed(best_pt)) - pt_of(p);
        if (dlt >= 0 && dlt <= 1) bp = p;
      end
      check(bp != 0, $sformatf("best_pt %0d is not a split point", $signed(best_pt)));
      picked = sq_at(longint'($signed(best_pt)));
      check(best - picked <= best / 128.0 + 0.01, $sformatf("picked sq %f max %f", picked, best));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
