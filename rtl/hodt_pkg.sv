// hodt_pkg: constants, types and constant functions shared by the online
// decision tree learner.
//
// Numeric attributes are 32-bit signed fixed point with 30 fraction bits
// (Q2.30), so values normalised to [-1,1] fit with headroom. Sample counts
// are 16-bit unsigned. Split qualities are unsigned fixed point with
// SQ_FR fraction bits, in units of samples.
//
// Hoeffding constants: with the gini range R = 1 and delta = 1e-3 the bound
// is eps^2 = K/n with K = R^2 ln(1/delta) / 2. Both K and tau^2 (tau = 0.05)
// are held in Q8.24. lambda = 0.01 is held in Q2.30. These follow the
// parameter settings of the original evaluation; R = 1 is this design's
// choice.
//
// The reciprocal table holds floor(2^32 / i) for i = 1..1023 (33 bits wide,
// so that 1/1 is exact) and is used by
// the split quality unit to normalise square sums without a divider.
package hodt_pkg;

  localparam int DW    = 32;   // numeric attribute width (Q2.30)
  localparam int FRAC  = 30;   // fraction bits of numeric attributes
  localparam int CW    = 16;   // sample count width
  localparam int SQ_FR = 12;   // fraction bits of split quality values
  localparam int SQW   = CW + SQ_FR + 4;  // split quality width

  // lambda = 0.01 in Q2.30
  localparam logic [DW-1:0] LAMBDA_FX = 32'd10737418;
  // K = ln(1000)/2 in Q8.24 (R = 1, delta = 1e-3)
  localparam logic [31:0] K_HB_Q24 = 32'd57946451;
  // tau^2 = 0.0025 in Q8.24
  localparam logic [31:0] TAU2_Q24 = 32'd41943;

  // Tree node types (Fig. "bit decomposition of tree node memory")
  typedef enum logic {NODE_LEAF = 1'b0, NODE_INTERNAL = 1'b1} node_type_e;

  // Operations issued to the per-attribute learners
  typedef enum logic [1:0] {
    OP_TRAIN = 2'd0,   // update the statistics with a sample
    OP_INIT  = 2'd1,   // initialise an (element, class) entry
    OP_READ  = 2'd2    // read out an (element, class) entry for a split trial
  } learn_op_e;

  // Reciprocal table: RECIP[i] = floor(2^32 / i), RECIP[0] = 0.
  localparam int RECIP_BITS = 10;
  typedef logic [32:0] recip_tab_t [1 << RECIP_BITS];

  function automatic recip_tab_t make_recip();
    recip_tab_t t;
    t[0] = '0;
    for (int i = 1; i < (1 << RECIP_BITS); i++)
      t[i] = 33'((64'd1 << 32) / 64'(i));
    return t;
  endfunction

  // Step constant alpha_k * lambda for quantile k (0-based), with
  // alpha_k = (k+1)/(nq+1).
  function automatic logic [DW-1:0] alpha_lambda(int k, int nq);
    return DW'((64'(LAMBDA_FX) * 64'(k + 1)) / 64'(nq + 1));
  endfunction

  // Step constant (1 - alpha_k) * lambda for quantile k (0-based).
  function automatic logic [DW-1:0] one_minus_alpha_lambda(int k, int nq);
    return DW'((64'(LAMBDA_FX) * 64'(nq - k)) / 64'(nq + 1));
  endfunction

endpackage
