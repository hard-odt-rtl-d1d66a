// tb_inference_engine: random samples to a few elements (often the same
// element back to back, so the U-to-P forwarding is used) with occasional
// element clears. A reference model keeps the per-element class counts and
// the majority label (replaced only when a count strictly exceeds the
// stored maximum) and predicts before learning. Each prediction must come
// exactly one cycle after its sample with the model's label and the
// sample's true label.
module tb_inference_engine;
  import hodt_pkg::*;
  localparam int NL = 3, NE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, pred_valid, init_valid;
  logic [1:0] in_elem, init_elem;
  logic [1:0] in_label, pred_label, pred_true_label;
  int checks = 0, failures = 0, cyc = 0, nfwd = 0;
  int cnt [NE][NL];
  int maxl [NE], maxc [NE];
  int exp_l [$], exp_t [$], exp_c [$];

  inference_engine #(.N_LABEL(NL), .N_ELEM(NE)) dut (.*);

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

  always @(posedge clk) begin
    cyc++;
    if (rst_n && pred_valid) begin
      check(exp_l.size() > 0, "unexpected prediction");
      if (exp_l.size() > 0) begin
        check(int'(pred_label) == exp_l.pop_front(), "predicted label");
        check(int'(pred_true_label) == exp_t.pop_front(), "true label");
        // the sample is driven after edge k and taken at edge k+1; its
        // prediction is valid after edge k+1 and seen here at edge k+2
        check(cyc - exp_c.pop_front() == 2, "prediction one cycle after the sample");
      end
    end
  end

  task automatic clear(input int e);
    @(negedge clk);
    in_valid = 0; init_valid = 1; init_elem = 2'(e);
    for (int j = 0; j < NL; j++) cnt[e][j] = 0;
    maxl[e] = 0; maxc[e] = 0;
    @(negedge clk);
    init_valid = 0;
  endtask

  initial begin
    int last_e;
    in_valid = 0; init_valid = 0; in_elem = 0; init_elem = 0; in_label = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < NE; e++) clear(e);
    last_e = 0;
    for (int t = 0; t < 8000; t++) begin
      int e, l;
      if (t % 500 == 499) begin
        @(negedge clk);
        in_valid = 0;
        repeat (3) @(negedge clk);
        clear($urandom % NE);
      end
      e = ($urandom % 3 == 0) ? $urandom % NE : last_e;
      if (e == last_e) nfwd++;
      last_e = e;
      // skewed labels so the majority changes now and then
      l = ($urandom % 4 == 0) ? $urandom % NL : (e % NL);
      @(negedge clk);
      if ($urandom % 6 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_elem = 2'(e); in_label = 2'(l);
      exp_l.push_back(maxl[e]);
      exp_t.push_back(l);
      exp_c.push_back(cyc);
      cnt[e][l]++;
      if (cnt[e][l] > maxc[e]) begin maxc[e] = cnt[e][l]; maxl[e] = l; end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);
    check(exp_l.size() == 0, "all predictions made");
    check(nfwd > 1000, "back-to-back samples to one element");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
