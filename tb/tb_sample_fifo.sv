// tb_sample_fifo: self-checking test of sample_fifo.
// Random pushes and pops against a queue model; checks data order, count,
// full/empty flags and that a full FIFO refuses writes.
module tb_sample_fifo;
  localparam int W = 20, D = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  int full_seen = 0;

  sample_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 99) < (i < 1500 ? 70 : 30));
      out_ready = ($urandom_range(0, 99) < (i < 1500 ? 30 : 70));
      in_data   = W'($urandom);
      #1;
      check(count == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      check(in_ready == (model.size() < D), "in_ready");
      check(out_valid == (model.size() > 0), "out_valid");
      if (out_valid) check(out_data == model[0], "head data");
      if (model.size() == D) full_seen++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    check(full_seen > 0, "FIFO never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
