// hoeffding_judge: split decision of a leaf from the best split of every
// attribute.
//
// Inputs are, per attribute, the best split quality SQ_i (see
// split_quality) and its split value, plus the leaf's per-class counts n_j
// and total n. The "no split" candidate has SQ_0 = sum_j n_j^2 / n (all
// samples on one side, gain 0); it is computed by an own split_quality
// instance and seeds both the best and the second best. The best and
// second-best attributes are then chosen by SQ.
//
// Because G = SQ/n + const, G_best - G_2nd = D/n with D = SQ_best - SQ_2nd.
// The Hoeffding test G_best - G_2nd > eps, eps^2 = K/n, K = R^2 ln(1/delta)/2,
// is evaluated in the equivalent division-free form D^2 > K*n, and the tie
// rule eps < tau as K < tau^2 * n. A split is made when the best candidate
// is a real attribute and either test holds. The original multiplies D by
// a stored 1/|S| and compares with eps; squaring both sides is this
// design's choice and gives the same decision without a square root.
// K and tau^2 are Q8.24 constants from hodt_pkg; SQ values carry SQ_FR =
// 12 fraction bits, so D^2 carries 24.
//
// Timing: start registers nothing but launches SQ_0; done pulses 3 cycles
// after start with split, split_attr, split_val and tie (split made by the
// tie rule only). The candidate inputs must stay stable until done.
module hoeffding_judge
  import hodt_pkg::*;
#(
  parameter int N_ATTR  = 8,
  parameter int N_LABEL = 2,
  parameter logic [31:0] K_Q24    = K_HB_Q24,
  parameter logic [31:0] TAU2_Q24_P = TAU2_Q24
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                           start,
  input  logic [N_ATTR-1:0]              cand_valid,
  input  logic [N_ATTR-1:0][SQW-1:0]     cand_sq,
  input  logic [N_ATTR-1:0][DW-1:0]      cand_val,
  input  logic [N_LABEL-1:0][CW-1:0]     n_cls,
  input  logic [CW-1:0]                  n_total,
  output logic                           done,
  output logic                           split,
  output logic                           tie,
  output logic [$clog2(N_ATTR)-1:0]      split_attr,
  output logic [DW-1:0]                  split_val
);
  localparam int AIW = $clog2(N_ATTR);

  logic           null_v;
  logic [SQW-1:0] null_sq;
  logic [31:0]    unused_tag;

  split_quality #(.N_LABEL(N_LABEL), .TAGW(32)) u_null (
    .clk, .rst_n, .in_valid(start), .left_cnt(n_cls), .right_cnt('0), .in_tag('0),
    .out_valid(null_v), .sq(null_sq), .out_tag(unused_tag)
  );

  logic [SQW-1:0] b1_sq, b2_sq;
  logic           b1_real;
  logic [AIW-1:0] b1_attr;
  logic [DW-1:0]  b1_val;
  logic [SQW-1:0] d;
  logic [2*SQW-1:0] d2;
  logic [63:0]    kn, tau_n;
  logic           hb_pass, tie_pass;

  always_comb begin
    b1_sq   = null_sq;
    b2_sq   = null_sq;
    b1_real = 1'b0;
    b1_attr = '0;
    b1_val  = '0;
    for (int i = 0; i < N_ATTR; i++) begin
      if (cand_valid[i]) begin
        if (cand_sq[i] > b1_sq) begin
          b2_sq   = b1_sq;
          b1_sq   = cand_sq[i];
          b1_real = 1'b1;
          b1_attr = AIW'(i);
          b1_val  = cand_val[i];
        end else if (cand_sq[i] > b2_sq) begin
          b2_sq = cand_sq[i];
        end
      end
    end
    d        = b1_sq - b2_sq;
    d2       = (2*SQW)'(d) * (2*SQW)'(d);
    kn       = 64'(K_Q24) * 64'(n_total);
    tau_n    = 64'(TAU2_Q24_P) * 64'(n_total);
    hb_pass  = (64'(d2) > kn);
    tie_pass = (64'(K_Q24) < tau_n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done       <= 1'b0;
      split      <= 1'b0;
      tie        <= 1'b0;
      split_attr <= '0;
      split_val  <= '0;
    end else begin
      done <= null_v;
      if (null_v) begin
        split      <= b1_real && (hb_pass || tie_pass);
        tie        <= b1_real && !hb_pass && tie_pass;
        split_attr <= b1_attr;
        split_val  <= b1_val;
      end
    end
  end
endmodule
