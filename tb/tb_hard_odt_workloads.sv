// tb_hard_odt_workloads: the learning system at full depth and leaf count
// with the attribute mixes of the other evaluated data sets, run side by
// side on synthetic streams (see odt_workload_run):
//   Bank        7 numeric,  9 categorical (up to 12 values), 2 classes
//   Telescope  10 numeric,  0 categorical,                  2 classes
//   Covertype  10 numeric, 44 binary categorical,           7 classes
//   Person      3 numeric,  2 categorical (4 values),      11 classes
// The default configuration (Electricity: 7 numeric, 1 categorical with
// 7 values, 2 classes) is run by tb_hard_odt_full. The real data sets are
// not used; only their shapes are.
module tb_hard_odt_workloads;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] done;
  int c [4], f [4];

  odt_workload_run #(.N_NUM(7),  .N_CAT(9),  .N_VAL(12), .N_LABEL(2),  .N_SAMP(4000), .MIN_ACC_PCT(85))
    u_bank      (.clk, .rst_n, .done(done[0]), .checks(c[0]), .failures(f[0]));
  odt_workload_run #(.N_NUM(10), .N_CAT(0),  .N_VAL(2),  .N_LABEL(2),  .N_SAMP(4000), .MIN_ACC_PCT(85))
    u_telescope (.clk, .rst_n, .done(done[1]), .checks(c[1]), .failures(f[1]));
  odt_workload_run #(.N_NUM(10), .N_CAT(44), .N_VAL(2),  .N_LABEL(7),  .N_SAMP(8000), .MIN_ACC_PCT(60))
    u_covertype (.clk, .rst_n, .done(done[2]), .checks(c[2]), .failures(f[2]));
  odt_workload_run #(.N_NUM(3),  .N_CAT(2),  .N_VAL(4),  .N_LABEL(11), .N_SAMP(8000), .MIN_ACC_PCT(65))
    u_person    (.clk, .rst_n, .done(done[3]), .checks(c[3]), .failures(f[3]));

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&done);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], f[0] + f[1] + f[2] + f[3]);
    $finish;
  end
endmodule
