// numeric_split_eval: best split point of one numeric attribute for the
// leaf under a split trial.
//
// On start it sweeps p = 1..N_PT, one point per cycle. For each point the
// split_point_gen gives pt from the leaf's min/max of the attribute, the
// partition_deduction turns the buffered quantiles of all classes and the
// per-class sample counts into left/right counts, and the split_quality
// unit (2-cycle pipeline) returns SQ tagged with pt. The largest SQ and its
// pt are kept (the first one wins ties). done pulses N_PT+3 cycles after
// start; best_valid is low when the leaf has seen no sample of the
// attribute (max < min). This unit stands for one lane of the "partition
// deduction unit" and "split quality measurement unit" of the original;
// the sequential sweep over points is this design's choice.
module numeric_split_eval
  import hodt_pkg::*;
#(
  parameter int N_QUANT = 8,
  parameter int N_LABEL = 2,
  parameter int N_PT    = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                                    start,
  input  logic [N_LABEL-1:0][N_QUANT-1:0][DW-1:0] q,
  input  logic [DW-1:0]                           min_val,
  input  logic [DW-1:0]                           max_val,
  input  logic [N_LABEL-1:0][CW-1:0]              n_cls,
  output logic                                    done,
  output logic                                    best_valid,
  output logic [SQW-1:0]                          best_sq,
  output logic [DW-1:0]                           best_pt
);
  localparam int PW = $clog2(N_PT + 1);

  logic                       running;
  logic [PW-1:0]              p;
  logic [PW:0]                n_res;
  logic [DW-1:0]              pt;
  logic [N_LABEL-1:0][CW-1:0] lc, rc;
  logic                       sq_v;
  logic [SQW-1:0]             sq;
  logic [DW-1:0]              sq_pt;
  logic                       range_ok;

  assign range_ok = ($signed(max_val) >= $signed(min_val));

  split_point_gen #(.N_PT(N_PT)) u_pt (.min_val, .max_val, .p, .pt);

  partition_deduction #(.N_QUANT(N_QUANT), .N_LABEL(N_LABEL)) u_pd (
    .pt, .q, .n_cls, .left_cnt(lc), .right_cnt(rc)
  );

  split_quality #(.N_LABEL(N_LABEL), .TAGW(DW)) u_sq (
    .clk, .rst_n, .in_valid(running), .left_cnt(lc), .right_cnt(rc), .in_tag(pt),
    .out_valid(sq_v), .sq, .out_tag(sq_pt)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      p          <= '0;
      n_res      <= '0;
      done       <= 1'b0;
      best_valid <= 1'b0;
      best_sq    <= '0;
      best_pt    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        running    <= 1'b1;
        p          <= PW'(1);
        n_res      <= '0;
        best_valid <= 1'b0;
        best_sq    <= '0;
        best_pt    <= '0;
      end else begin
        if (running) begin
          if (p == PW'(N_PT)) running <= 1'b0;
          else                p <= p + 1'b1;
        end
        if (sq_v) begin
          n_res <= n_res + 1'b1;
          if (range_ok && (!best_valid || sq > best_sq)) begin
            best_valid <= 1'b1;
            best_sq    <= sq;
            best_pt    <= sq_pt;
          end
          if (n_res == (PW+1)'(N_PT - 1)) done <= 1'b1;
        end
      end
    end
  end
endmodule
