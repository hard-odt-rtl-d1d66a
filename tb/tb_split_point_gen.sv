// tb_split_point_gen: split points pt = min + (max-min)*p/(N_PT+1) for
// random ranges, compared with exact integer arithmetic (1 LSB allowed for
// the reciprocal multiplication).
module tb_split_point_gen;
  localparam int NPT = 10;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] min_val, max_val, pt;
  logic [3:0] p;
  int checks = 0, failures = 0;

  split_point_gen #(.N_PT(NPT)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      longint a, b, lo, hi, exp_pt, diff;
      a = longint'($signed($urandom));
      b = longint'($signed($urandom));
      if (i % 5 == 0) b = a;
      lo = (a < b) ? a : b;
      hi = (a < b) ? b : a;
      min_val = 32'(lo); max_val = 32'(hi);
      p = 4'($urandom_range(1, NPT));
      #1;
      exp_pt = lo + ((hi - lo) * longint'(p)) / (NPT + 1);
      diff = longint'($signed(pt)) - exp_pt;
      checks++;
      if (diff < 0 || diff > 1) begin
        failures++;
        $display("FAIL lo=%0d hi=%0d p=%0d got %0d exp %0d", lo, hi, p, $signed(pt), exp_pt);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
