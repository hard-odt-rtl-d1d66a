// tb_quantile_unit: checks one quantile computation step against the
// update rule Q' = Q + alpha*lambda if Q < x, Q - (1-alpha)*lambda if Q >= x,
// with alpha = (K+1)/(N_QUANT+1) and lambda = 0.01 (10737418 in Q2.30).
module tb_quantile_unit;
  localparam int K = 2, NQ = 8;
  localparam longint LAM = 10737418;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] q_prev, x, q_next;
  int checks = 0, failures = 0;

  quantile_unit #(.K(K), .N_QUANT(NQ)) dut (.q_prev, .x, .q_next);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint up, down, exp_q;
    up   = (LAM * (K + 1)) / (NQ + 1);
    down = (LAM * (NQ - K)) / (NQ + 1);
    for (int i = 0; i < 2000; i++) begin
      q_prev = $urandom_range(0, 1) ? $urandom : 32'($signed($urandom_range(0, 2000)) - 1000);
      x      = (i % 7 == 0) ? q_prev : $urandom;
      #1;
      if ($signed(q_prev) >= $signed(x)) exp_q = longint'($signed(q_prev)) - down;
      else                               exp_q = longint'($signed(q_prev)) + up;
      checks++;
      if (q_next !== 32'(exp_q)) begin
        failures++;
        $display("FAIL q=%0d x=%0d got %0d exp %0d", $signed(q_prev), $signed(x), $signed(q_next), exp_q);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
