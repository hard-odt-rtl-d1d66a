// split_quality: gini split-quality term of one candidate partition.
//
// Reorganising the gini impurity reduction of a split S -> (S_L, S_R) gives
//     G = (1/|S|) * SQ + gini(S) - 1,
//     SQ = sum_j |S_L,j|^2 / |S_L| + sum_j |S_R,j|^2 / |S_R|.
// For one leaf, |S| and gini(S) are the same for every candidate, so
// candidates are ranked by SQ alone; only the final Hoeffding test needs
// the 1/|S| factor. This unit computes SQ for one partition per cycle.
//
// Pipeline (2 cycles, one partition per cycle):
//   1  multiplier-adder tree: |S_L|, |S_R|, sum of squares of each side;
//   2  normalisation: each square sum times a looked-up reciprocal of the
//      side's size. The table holds floor(2^32/i) for 10-bit i; larger
//      sizes are shifted right to 10 significant bits first and the
//      reciprocal shifted back, so the relative error stays below 2^-9
//      (the table-lookup in place of a divider follows the original; the
//      normalisation scheme is this design's choice). An empty side
//      contributes 0.
// Output sq is unsigned fixed point with SQ_FR fraction bits, in samples.
// A tag (for instance the split value) travels with each partition.
module split_quality
  import hodt_pkg::*;
#(
  parameter int N_LABEL = 2,
  parameter int TAGW    = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                       in_valid,
  input  logic [N_LABEL-1:0][CW-1:0] left_cnt,
  input  logic [N_LABEL-1:0][CW-1:0] right_cnt,
  input  logic [TAGW-1:0]            in_tag,
  output logic                       out_valid,
  output logic [SQW-1:0]             sq,
  output logic [TAGW-1:0]            out_tag
);
  localparam int SUMW = CW + $clog2(N_LABEL + 1);
  localparam int SSW  = 2 * CW + $clog2(N_LABEL + 1);
  localparam recip_tab_t RECIP = make_recip();

  logic              s1_v;
  logic [SUMW-1:0]   s1_nl, s1_nr;
  logic [SSW-1:0]    s1_ssl, s1_ssr;
  logic [TAGW-1:0]   s1_tag;

  // stage 1: multiplier-adder tree
  always_ff @(posedge clk) begin
    logic [SUMW-1:0] nl, nr;
    logic [SSW-1:0]  ssl, ssr;
    nl = '0; nr = '0; ssl = '0; ssr = '0;
    for (int j = 0; j < N_LABEL; j++) begin
      nl  = nl  + SUMW'(left_cnt[j]);
      nr  = nr  + SUMW'(right_cnt[j]);
      ssl = ssl + SSW'(left_cnt[j])  * SSW'(left_cnt[j]);
      ssr = ssr + SSW'(right_cnt[j]) * SSW'(right_cnt[j]);
    end
    s1_nl  <= nl;
    s1_nr  <= nr;
    s1_ssl <= ssl;
    s1_ssr <= ssr;
    s1_tag <= in_tag;
  end

  // normalised reciprocal of a count: returns floor(2^32/s) approximately
  function automatic logic [32:0] recip_of(logic [SUMW-1:0] s);
    int msb;
    int sh;
    logic [SUMW-1:0] idx;
    msb = 0;
    for (int b = 0; b < SUMW; b++) if (s[b]) msb = b;
    sh  = (msb >= RECIP_BITS) ? msb - RECIP_BITS + 1 : 0;
    idx = s >> sh;
    return RECIP[idx[RECIP_BITS-1:0]] >> sh;
  endfunction

  function automatic logic [SQW-1:0] norm(logic [SSW-1:0] ss, logic [SUMW-1:0] s);
    logic [SSW+32:0] p;
    p = (SSW+33)'(ss) * (SSW+33)'(recip_of(s));
    return SQW'(p >> (32 - SQ_FR));
  endfunction

  always_ff @(posedge clk) begin
    sq      <= norm(s1_ssl, s1_nl) + norm(s1_ssr, s1_nr);
    out_tag <= s1_tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_v      <= in_valid;
      out_valid <= s1_v;
    end
  end
endmodule
