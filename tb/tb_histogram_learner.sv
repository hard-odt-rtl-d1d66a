// tb_histogram_learner: random train / init / read operations against a
// reference count model. Checks that an element is cleared by its status
// word alone (stale counts must read as 0 and restart at 1) and that the
// status-bit initialisation path is taken.
module tb_histogram_learner;
  import hodt_pkg::*;
  localparam int NV = 5, NL = 3, NE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid;
  learn_op_e in_op;
  logic [1:0] in_elem;
  logic [1:0] in_label;
  logic [2:0] in_value;
  logic rd_valid;
  logic [1:0] rd_label;
  logic [NV-1:0][15:0] rd_hist;
  logic init_hit;
  int checks = 0, failures = 0, n_init_hit = 0;

  histogram_learner #(.N_VAL(NV), .N_LABEL(NL), .N_ELEM(NE)) dut (.*);

  int model [NE][NV][NL];
  int exp_l [$];
  int exp_h [$];

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

  always @(posedge clk) begin
    if (init_hit) n_init_hit++;
    if (rst_n && rd_valid) begin
      check(exp_l.size() > 0, "unexpected read-out");
      if (exp_l.size() > 0) begin
        check(int'(rd_label) == exp_l.pop_front(), "label");
        for (int v = 0; v < NV; v++)
          begin int ex; ex = exp_h.pop_front(); check(int'(rd_hist[v]) == ex, $sformatf("count v=%0d got %0d exp %0d t=%0t", v, rd_hist[v], ex, $time)); end
      end
    end
  end

  task automatic issue(input learn_op_e op, input int e, input int l, input int v);
    @(negedge clk);
    in_valid = 1; in_op = op; in_elem = 2'(e); in_label = 2'(l); in_value = 3'(v);
    case (op)
      OP_TRAIN: model[e][v][l]++;
      OP_INIT:  for (int a = 0; a < NV; a++) for (int b = 0; b < NL; b++) model[e][a][b] = 0;
      default: begin
        exp_l.push_back(l);
        for (int a = 0; a < NV; a++) exp_h.push_back(model[e][a][l]);
      end
    endcase
  endtask

  initial begin
    in_valid = 0; in_op = OP_TRAIN; in_elem = 0; in_label = 0; in_value = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < NE; e++) issue(OP_INIT, e, 0, 0);
    for (int i = 0; i < 3000; i++) begin
      int r;
      r = $urandom_range(0, 99);
      if (r < 80)      issue(OP_TRAIN, $urandom_range(0, NE-1), $urandom_range(0, NL-1), $urandom_range(0, NV-1));
      else if (r < 96) issue(OP_READ, $urandom_range(0, NE-1), $urandom_range(0, NL-1), 0);
      else             issue(OP_INIT, $urandom_range(0, NE-1), 0, 0);
      if (i % 3 == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    check(exp_l.size() == 0, "missing read-outs");
    check(n_init_hit > NE * NV, "status-bit initialisation path rarely used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
