// tb_split_quality: SQ = sum L_j^2/|L| + sum R_j^2/|R| for random counts,
// compared with real arithmetic (relative error below 2^-8 allowed), with
// the 2-cycle latency and back-to-back throughput checked.
module tb_split_quality;
  localparam int NL = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [NL-1:0][15:0] left_cnt, right_cnt;
  logic [31:0] in_tag, out_tag, sq;
  int checks = 0, failures = 0;
  real    exp_q [$];
  int     exp_t [$];
  int     exp_c [$];
  int     cyc = 0;

  split_quality #(.N_LABEL(NL), .TAGW(32)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      real e, g;
      checks += 3;
      e = exp_q.pop_front();
      g = real'(sq) / 4096.0;
      if ((g - e > e / 256.0 + 0.001) || (e - g > e / 256.0 + 0.001)) begin
        failures++; $display("FAIL sq got %f exp %f", g, e);
      end
      if (out_tag != 32'(exp_t.pop_front())) begin failures++; $display("FAIL tag"); end
      if (cyc - exp_c.pop_front() != 2) begin failures++; $display("FAIL latency"); end
    end
  end

  initial begin
    in_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      real sl, sr, ql, qr, e;
      @(negedge clk);
      in_valid = 1;
      in_tag = 32'(i);
      sl = 0; sr = 0; ql = 0; qr = 0;
      for (int j = 0; j < NL; j++) begin
        int m;
        m = (i % 3 == 0) ? 300 : ((i % 3 == 1) ? 5000 : 65535 / NL);
        left_cnt[j]  = 16'($urandom_range(0, m));
        right_cnt[j] = (i % 17 == 0) ? 16'd0 : 16'($urandom_range(0, m));
        sl += left_cnt[j]; sr += right_cnt[j];
        ql += real'(left_cnt[j]) * real'(left_cnt[j]);
        qr += real'(right_cnt[j]) * real'(right_cnt[j]);
      end
      e = 0;
      if (sl > 0) e += ql / sl;
      if (sr > 0) e += qr / sr;
      exp_q.push_back(e);
      exp_t.push_back(i);
      exp_c.push_back(cyc + 1);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
