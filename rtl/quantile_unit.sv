// quantile_unit: one Q(alpha_k) computation unit.
//
// Implements one step of quantile estimation with an asymmetric signum
// function:  Q_t = Q_{t-1} - lambda * sgn_alpha(Q_{t-1} - x_t), where
// sgn_alpha(z) = -alpha for z < 0 and 1 - alpha for z >= 0. In hardware this
// is one comparator (Q_{t-1} >= x), a two-way multiplexer between the
// constants -alpha*lambda and (1-alpha)*lambda, and one subtractor, as in
// the original's quantile computation unit.
//
// alpha_k = (K+1)/(N_QUANT+1) for unit K (0-based), so the N_QUANT
// quantiles sit at evenly spaced probabilities strictly inside (0,1); this
// spacing is this design's choice. All values are Q2.30 signed; the
// constants come from hodt_pkg (lambda = 0.01). Purely combinational.
module quantile_unit
  import hodt_pkg::*;
#(
  parameter int K       = 0,
  parameter int N_QUANT = 8
) (
  input  logic [DW-1:0] q_prev,
  input  logic [DW-1:0] x,
  output logic [DW-1:0] q_next
);
  localparam logic [DW-1:0] STEP_UP   = alpha_lambda(K, N_QUANT);            // alpha*lambda
  localparam logic [DW-1:0] STEP_DOWN = one_minus_alpha_lambda(K, N_QUANT);  // (1-alpha)*lambda

  logic          ge;
  logic [DW-1:0] sub_operand;

  assign ge          = ($signed(q_prev) >= $signed(x));
  assign sub_operand = ge ? STEP_DOWN : (~STEP_UP + 1'b1);   // (1-alpha)lambda or -alpha*lambda
  assign q_next      = q_prev - sub_operand;
endmodule
