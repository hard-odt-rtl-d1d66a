// tb_quantile_learner: random train / init / read operations against a
// reference model of the quantile sets. Many operations hit the same
// (element, class) back to back so both forwarding paths are exercised;
// read-outs are checked 4 cycles after issue, min/max after each train.
module tb_quantile_learner;
  import hodt_pkg::*;
  localparam int NQ = 4, NL = 2, NE = 4;
  localparam longint LAM = 10737418;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid;
  learn_op_e in_op;
  logic [1:0] in_elem;
  logic [0:0] in_label;
  logic [31:0] in_x;
  logic rd_valid;
  logic [0:0] rd_label;
  logic [NQ-1:0][31:0] rd_q;
  logic [1:0] mm_elem;
  logic [31:0] mm_min, mm_max;
  logic fwd_c_hit, fwd_w_hit;
  int checks = 0, failures = 0, nfc = 0, nfw = 0;

  quantile_learner #(.N_QUANT(NQ), .N_LABEL(NL), .N_ELEM(NE)) dut (.*);

  longint model [NE][NL][NQ];
  longint mmin [NE], mmax [NE];
  // expected read-outs, in issue order
  longint exp_rd [$];
  int     exp_rl [$];

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
    if (fwd_c_hit) nfc++;
    if (fwd_w_hit) nfw++;
    if (rst_n && rd_valid) begin
      check(exp_rl.size() > 0, "unexpected read-out");
      if (exp_rl.size() > 0) begin
        check(int'(rd_label) == exp_rl.pop_front(), "read label");
        for (int k = 0; k < NQ; k++)
          check(longint'($signed(rd_q[k])) == exp_rd.pop_front(), $sformatf("quantile %0d", k));
      end
    end
  end

  task automatic issue(input learn_op_e op, input int e, input int l, input longint xv);
    @(negedge clk);
    in_valid = 1; in_op = op; in_elem = 2'(e); in_label = 1'(l); in_x = 32'(xv);
    case (op)
      OP_TRAIN: begin
        for (int k = 0; k < NQ; k++) begin
          if (model[e][l][k] >= xv) model[e][l][k] -= (LAM * (NQ - k)) / (NQ + 1);
          else                      model[e][l][k] += (LAM * (k + 1)) / (NQ + 1);
        end
        if (xv < mmin[e]) mmin[e] = xv;
        if (xv > mmax[e]) mmax[e] = xv;
      end
      OP_INIT: begin
        for (int k = 0; k < NQ; k++) model[e][l][k] = 0;
        mmin[e] = 64'sh7fffffff; mmax[e] = -64'sh80000000;
      end
      default: begin
        exp_rl.push_back(l);
        for (int k = 0; k < NQ; k++) exp_rd.push_back(model[e][l][k]);
      end
    endcase
  endtask

  initial begin
    in_valid = 0; in_op = OP_TRAIN; in_elem = 0; in_label = 0; in_x = 0; mm_elem = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < NE; e++) for (int l = 0; l < NL; l++) issue(OP_INIT, e, l, 0);
    for (int i = 0; i < 4000; i++) begin
      int r, e, l;
      longint xv;
      r  = $urandom_range(0, 99);
      e  = (i % 50 < 25) ? 1 : $urandom_range(0, NE - 1);
      l  = (i % 50 < 20) ? 0 : $urandom_range(0, NL - 1);
      xv = longint'($signed($urandom_range(0, 2000000000))) - 1000000000;
      if (r < 80)      issue(OP_TRAIN, e, l, xv);
      else if (r < 97) issue(OP_READ, e, l, 0);
      else             issue(OP_INIT, e, l, 0);
      if (i % 2 == 0) begin
        @(negedge clk);
        in_valid = 0;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (8) @(posedge clk);
    for (int e = 0; e < NE; e++) begin
      mm_elem = 2'(e);
      #1;
      check(longint'($signed(mm_min)) == mmin[e], "min");
      check(longint'($signed(mm_max)) == mmax[e], "max");
    end
    check(exp_rl.size() == 0, "missing read-outs");
    check(nfc > 0, "newer-result forwarding never used");
    check(nfw > 0, "older-result forwarding never used");
    $display("forwarding: newer %0d, older %0d", nfc, nfw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
