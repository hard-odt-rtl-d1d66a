// categorical_split_eval: best split value of one categorical attribute for
// the leaf under a split trial.
//
// Each attribute value v = 0..N_VAL-1 is tried as a split point in turn,
// one per cycle: samples with the attribute equal to v go left, all others
// right. From the buffered histogram counts h[v][j] and the per-class
// sample counts n_j this gives left_j = h[v][j], right_j = n_j - h[v][j],
// which the split_quality unit (2-cycle pipeline) turns into SQ. The
// largest SQ and its value are kept (first wins ties); done pulses
// N_VAL+3 cycles after start. The equality split follows the original;
// the sequential sweep is this design's choice.
module categorical_split_eval
  import hodt_pkg::*;
#(
  parameter int N_VAL   = 7,
  parameter int N_LABEL = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                                   start,
  input  logic [N_VAL-1:0][N_LABEL-1:0][CW-1:0]  hist,
  input  logic [N_LABEL-1:0][CW-1:0]             n_cls,
  output logic                                   done,
  output logic                                   best_valid,
  output logic [SQW-1:0]                         best_sq,
  output logic [DW-1:0]                          best_val
);
  localparam int VW = $clog2(N_VAL + 1);

  logic                       running;
  logic [VW-1:0]              v;
  logic [VW:0]                n_res;
  logic [N_LABEL-1:0][CW-1:0] lc, rc;
  logic                       sq_v;
  logic [SQW-1:0]             sq;
  logic [DW-1:0]              sq_val;

  always_comb begin
    for (int j = 0; j < N_LABEL; j++) begin
      lc[j] = (32'(v) < N_VAL) ? hist[v][j] : '0;
      rc[j] = n_cls[j] - lc[j];
    end
  end

  split_quality #(.N_LABEL(N_LABEL), .TAGW(DW)) u_sq (
    .clk, .rst_n, .in_valid(running), .left_cnt(lc), .right_cnt(rc), .in_tag(DW'(v)),
    .out_valid(sq_v), .sq, .out_tag(sq_val)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      v          <= '0;
      n_res      <= '0;
      done       <= 1'b0;
      best_valid <= 1'b0;
      best_sq    <= '0;
      best_val   <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        running    <= 1'b1;
        v          <= '0;
        n_res      <= '0;
        best_valid <= 1'b0;
        best_sq    <= '0;
        best_val   <= '0;
      end else begin
        if (running) begin
          if (v == VW'(N_VAL - 1)) running <= 1'b0;
          else                     v <= v + 1'b1;
        end
        if (sq_v) begin
          n_res <= n_res + 1'b1;
          if (!best_valid || sq > best_sq) begin
            best_valid <= 1'b1;
            best_sq    <= sq;
            best_val   <= sq_val;
          end
          if (n_res == (VW+1)'(N_VAL - 1)) done <= 1'b1;
        end
      end
    end
  end
endmodule
