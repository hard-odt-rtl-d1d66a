// tb_partition_deduction: left_j = floor(k_j * n_j / N_QUANT) with k_j the
// number of class-j quantiles strictly below pt, right_j = n_j - left_j.
module tb_partition_deduction;
  localparam int NQ = 8, NL = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] pt;
  logic [NL-1:0][NQ-1:0][31:0] q;
  logic [NL-1:0][15:0] n_cls, left_cnt, right_cnt;
  int checks = 0, failures = 0;

  partition_deduction #(.N_QUANT(NQ), .N_LABEL(NL)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      pt = 32'($signed($urandom_range(0, 200)) - 100);
      for (int j = 0; j < NL; j++) begin
        n_cls[j] = 16'($urandom_range(0, 65535));
        for (int k = 0; k < NQ; k++) q[j][k] = (k == 3) ? pt : 32'($signed($urandom_range(0, 200)) - 100);
      end
      #1;
      for (int j = 0; j < NL; j++) begin
        int k_cnt;
        longint l;
        k_cnt = 0;
        for (int k = 0; k < NQ; k++) if ($signed(q[j][k]) < $signed(pt)) k_cnt++;
        l = (longint'(k_cnt) * longint'(n_cls[j])) / NQ;
        checks += 2;
        if (left_cnt[j] != 16'(l))           begin failures++; $display("FAIL left j=%0d", j); end
        if (right_cnt[j] != n_cls[j] - 16'(l)) begin failures++; $display("FAIL right j=%0d", j); end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
