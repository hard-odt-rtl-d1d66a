// partition_deduction: left/right partition sizes of one candidate split
// point, deduced from the learned quantiles.
//
// For each class j, k_j is the number of the class's N_QUANT quantiles that
// lie strictly below the split point. The class's samples are divided as
//     left_j  = k_j * n_j / N_QUANT   (rounded down)
//     right_j = n_j - left_j,
// i.e. the left share is rounded down to the nearest quantile, following
// the original algorithm (its pseudo-code divides the count by the
// quantile count, written |P| there). All classes are handled in parallel
// (N_LABEL * N_QUANT signed comparators). Purely combinational.
module partition_deduction
  import hodt_pkg::*;
#(
  parameter int N_QUANT = 8,
  parameter int N_LABEL = 2
) (
  input  logic [DW-1:0]                            pt,
  input  logic [N_LABEL-1:0][N_QUANT-1:0][DW-1:0]  q,
  input  logic [N_LABEL-1:0][CW-1:0]               n_cls,
  output logic [N_LABEL-1:0][CW-1:0]               left_cnt,
  output logic [N_LABEL-1:0][CW-1:0]               right_cnt
);
  localparam int KW = $clog2(N_QUANT + 1);

  always_comb begin
    for (int j = 0; j < N_LABEL; j++) begin
      logic [KW-1:0]    k;
      logic [CW+KW-1:0] prod;
      k = '0;
      for (int i = 0; i < N_QUANT; i++)
        if ($signed(pt) > $signed(q[j][i])) k = k + 1'b1;
      prod         = (CW+KW)'(k) * (CW+KW)'(n_cls[j]);
      left_cnt[j]  = CW'(prod / (CW+KW)'(N_QUANT));
      right_cnt[j] = n_cls[j] - left_cnt[j];
    end
  end
endmodule
