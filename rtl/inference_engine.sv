// inference_engine: majority-vote prediction for each leaf element.
//
// For every element (the physical statistics slot bound to a leaf) the
// engine keeps one sample count per label plus the current majority label
// and its count. A sample that has reached its leaf goes through three
// stages, one clock each:
//   RD  the sample (element, label) is registered;
//   P   the element's counts are read and the stored majority label is
//       issued as the prediction (pred_valid, pred_label);
//   U   the count of the sample's label is incremented, and the majority
//       label/count are replaced when the new count exceeds the old maximum.
// The prediction therefore appears in the second stage, P, one cycle after
// the sample is presented, as in the original, and is made before the sample's own label is learned
// (test-then-train). When a sample in P uses the element that the sample
// in U is updating, the U results are forwarded so back-to-back samples to
// one leaf see every update. Counts saturate at 2^CW-1 (this design's
// choice).
//
// init_valid clears the counts of init_elem (new leaf). In the original the
// counts sit in block RAM; here they are an array read combinationally in P.
module inference_engine
  import hodt_pkg::*;
#(
  parameter int N_LABEL = 2,
  parameter int N_ELEM  = 1024
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                         in_valid,
  input  logic [$clog2(N_ELEM)-1:0]    in_elem,
  input  logic [$clog2(N_LABEL)-1:0]   in_label,
  output logic                         pred_valid,
  output logic [$clog2(N_LABEL)-1:0]   pred_label,
  output logic [$clog2(N_LABEL)-1:0]   pred_true_label,
  input  logic                         init_valid,
  input  logic [$clog2(N_ELEM)-1:0]    init_elem
);
  localparam int EW = $clog2(N_ELEM);
  localparam int LW = $clog2(N_LABEL);

  logic [N_LABEL-1:0][CW-1:0] cnt_mem  [N_ELEM];
  logic [LW-1:0]              maxl_mem [N_ELEM];
  logic [CW-1:0]              maxc_mem [N_ELEM];

  // RD stage
  logic          rd_v;
  logic [EW-1:0] rd_e;
  logic [LW-1:0] rd_l;
  // P stage result registered into U
  logic                       u_v;
  logic [EW-1:0]              u_e;
  logic [LW-1:0]              u_l;
  logic [N_LABEL-1:0][CW-1:0] u_cnt;
  logic [LW-1:0]              u_maxl;
  logic [CW-1:0]              u_maxc;
  // U stage new values
  logic [N_LABEL-1:0][CW-1:0] n_cnt;
  logic [LW-1:0]              n_maxl;
  logic [CW-1:0]              n_maxc;
  // P stage operands
  logic [N_LABEL-1:0][CW-1:0] p_cnt;
  logic [LW-1:0]              p_maxl;
  logic [CW-1:0]              p_maxc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v <= 1'b0;
      u_v  <= 1'b0;
    end else begin
      rd_v <= in_valid;
      u_v  <= rd_v;
    end
  end

  always_ff @(posedge clk) begin
    rd_e <= in_elem;
    rd_l <= in_label;
  end

  // P: read with forwarding from U
  always_comb begin
    if (u_v && (u_e == rd_e)) begin
      p_cnt  = n_cnt;
      p_maxl = n_maxl;
      p_maxc = n_maxc;
    end else begin
      p_cnt  = cnt_mem[rd_e];
      p_maxl = maxl_mem[rd_e];
      p_maxc = maxc_mem[rd_e];
    end
  end

  assign pred_valid      = rd_v;
  assign pred_label      = p_maxl;
  assign pred_true_label = rd_l;

  always_ff @(posedge clk) begin
    u_e    <= rd_e;
    u_l    <= rd_l;
    u_cnt  <= p_cnt;
    u_maxl <= p_maxl;
    u_maxc <= p_maxc;
  end

  // U: increment and majority update
  always_comb begin
    n_cnt  = u_cnt;
    n_maxl = u_maxl;
    n_maxc = u_maxc;
    if (u_cnt[u_l] != '1) n_cnt[u_l] = u_cnt[u_l] + 1'b1;
    if (n_cnt[u_l] > u_maxc) begin
      n_maxl = u_l;
      n_maxc = n_cnt[u_l];
    end
  end

  always_ff @(posedge clk) begin
    if (u_v) begin
      cnt_mem[u_e]  <= n_cnt;
      maxl_mem[u_e] <= n_maxl;
      maxc_mem[u_e] <= n_maxc;
    end
    if (init_valid) begin
      cnt_mem[init_elem]  <= '0;
      maxl_mem[init_elem] <= '0;
      maxc_mem[init_elem] <= '0;
    end
  end
endmodule
