// tb_categorical_split_eval: random per-value class histograms. The
// reference computes, for every value v, the exact Gini split quality of
// the one-versus-rest partition (v against all other values) and the
// maximum over v. The unit's best_sq must be within 2^-8 (relative) of the
// maximum, and the exact quality of the value it picked must be within the
// same bound of the maximum. done must follow start by N_VAL + 3 cycles.
module tb_categorical_split_eval;
  import hodt_pkg::*;
  localparam int NV = 5, NL = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, best_valid;
  logic [NV-1:0][NL-1:0][15:0] hist;
  logic [NL-1:0][15:0] n_cls;
  logic [31:0] best_sq, best_val;
  int checks = 0, failures = 0, cyc = 0;

  categorical_split_eval #(.N_VAL(NV), .N_LABEL(NL)) dut (.*);

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

  function automatic real sq_of(input int v);
    real sl, sr, ql, qr, e;
    sl = 0; sr = 0; ql = 0; qr = 0;
    for (int j = 0; j < NL; j++) begin
      real l, r;
      l = real'(hist[v][j]); r = real'(n_cls[j]) - l;
      sl += l; sr += r; ql += l * l; qr += r * r;
    end
    e = 0;
    if (sl > 0) e += ql / sl;
    if (sr > 0) e += qr / sr;
    return e;
  endfunction

  initial begin
    start = 0; hist = '0; n_cls = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      real best, got, picked;
      int c0, m;
      m = (t % 2) ? 50 : 4000;
      @(negedge clk);
      n_cls = '0;
      for (int v = 0; v < NV; v++)
        for (int j = 0; j < NL; j++) begin
          hist[v][j] = 16'($urandom_range(0, m));
          n_cls[j] += hist[v][j];
        end
      start = 1;
      c0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      check(cyc - c0 == NV + 3, $sformatf("done after %0d cycles", cyc - c0));
      best = 0;
      for (int v = 0; v < NV; v++) if (sq_of(v) > best) best = sq_of(v);
      got = real'(best_sq) / 4096.0;
      check(best_valid, "best_valid");
      check(got - best <= best / 256.0 + 0.01 && best - got <= best / 256.0 + 0.01,
            $sformatf("best sq got %f exp %f", got, best));
      check(best_val < NV, "best value in range");
      if (best_val < NV) begin
        picked = sq_of(int'(best_val));
        check(best - picked <= best / 128.0 + 0.01, $sformatf("picked value %0d sq %f max %f", best_val, picked, best));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
