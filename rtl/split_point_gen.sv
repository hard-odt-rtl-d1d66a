// split_point_gen: evenly spaced candidate split points for one numeric
// attribute.
//
// For split point index p (1..N_PT) it returns
//     pt = min + (max - min) * p / (N_PT + 1),
// so the N_PT points divide the observed range [min, max] of the attribute
// in the leaf into N_PT+1 equal intervals, as in the original algorithm.
// The division by the constant N_PT+1 is done as a multiplication by the
// 40-bit reciprocal ceil(2^40/(N_PT+1)) (this design's choice; the result
// can be at most 1 LSB above the exact quotient). Values are Q2.30 signed with
// max >= min. Purely combinational.
module split_point_gen
  import hodt_pkg::*;
#(
  parameter int N_PT = 10
) (
  input  logic [DW-1:0]               min_val,
  input  logic [DW-1:0]               max_val,
  input  logic [$clog2(N_PT+1)-1:0]   p,
  output logic [DW-1:0]               pt
);
  localparam int RB = 40;   // reciprocal precision
  localparam logic [RB:0] RECIP = (RB+1)'(((64'd1 << RB) + 64'(N_PT)) / 64'(N_PT + 1));
  localparam int SCW = DW + 1 + $clog2(N_PT + 1);
  localparam int PRW = SCW + RB + 1;

  logic [DW:0]      range_v;           // max - min, up to 2^32
  logic [SCW-1:0]   scaled;            // range * p
  logic [PRW-1:0]   prod;

  assign range_v = {max_val[DW-1], max_val} - {min_val[DW-1], min_val};
  assign scaled  = SCW'(range_v) * SCW'(p);
  assign prod    = PRW'(scaled) * PRW'(RECIP);
  assign pt      = min_val + prod[RB+DW-1:RB];
endmodule
