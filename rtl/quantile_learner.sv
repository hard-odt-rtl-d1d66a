// quantile_learner: quantile learning for one numeric attribute, shared by
// all elements and classes.
//
// Memory-based resource sharing: the N_QUANT quantiles of every (element,
// class) pair live in one memory word of N_QUANT*32 bits, addressed by
// {element, class}. Only the pair selected by a sample's leaf element and
// label is touched, so one set of N_QUANT quantile_units (quantile-level
// parallelism) serves every leaf and class. One learner is instantiated
// per numeric attribute (attribute-level parallelism).
//
// Five-stage pipeline, one clock per stage, one operation per cycle:
//   F  the operation is taken from the input;
//   B  the branch is decided: train, element initialisation or read-out;
//   R  the quantile word at {element, class} is read (synchronous memory);
//   C  train: every quantile is updated by its quantile_unit;
//      init:  the word becomes all zeros (quantiles start at 0.0, the middle
//             of the normalised range; this design's choice);
//      read:  the word is presented on rd_q with rd_valid;
//   W  the result is written back to the same address.
// Data forwarding removes the read-after-write hazard: in C the operand is
// taken from the result of the previous operation (now in W) if its address
// matches, else from the operation before that if its address matches,
// else from memory. The newer result has priority. With this, samples that
// hit the same element and class on consecutive cycles still learn in
// order at one sample per cycle.
//
// The learner also tracks the minimum and maximum value of its attribute
// per element (updated in C, cleared by init), read combinationally through
// mm_elem for split point generation. rd_valid follows the read operation's
// input by 4 cycles.
module quantile_learner
  import hodt_pkg::*;
#(
  parameter int N_QUANT = 8,
  parameter int N_LABEL = 2,
  parameter int N_ELEM  = 1024
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                       in_valid,
  input  learn_op_e                  in_op,
  input  logic [$clog2(N_ELEM)-1:0]  in_elem,
  input  logic [$clog2(N_LABEL)-1:0] in_label,
  input  logic [DW-1:0]              in_x,
  output logic                       rd_valid,
  output logic [$clog2(N_LABEL)-1:0] rd_label,
  output logic [N_QUANT-1:0][DW-1:0] rd_q,
  input  logic [$clog2(N_ELEM)-1:0]  mm_elem,
  output logic [DW-1:0]              mm_min,
  output logic [DW-1:0]              mm_max,
  output logic                       fwd_c_hit,   // forwarding from the newer result used
  output logic                       fwd_w_hit    // forwarding from the older result used
);
  localparam int EW = $clog2(N_ELEM);
  localparam int LW = $clog2(N_LABEL);
  localparam int AW = EW + LW;

  typedef logic [N_QUANT-1:0][DW-1:0] qset_t;

  typedef struct packed {
    learn_op_e     op;
    logic [AW-1:0] addr;
    logic [DW-1:0] x;
  } qop_t;

  qset_t qmem [N_ELEM << LW];   // address {element, class}
  logic [DW-1:0] min_mem [N_ELEM];
  logic [DW-1:0] max_mem [N_ELEM];

  qop_t  f_op, b_op, r_op, c_op, w_op, ww_op;
  logic  f_v, b_v, r_v, c_v, w_v, ww_v;
  qset_t mem_q, operand, c_result, w_data, ww_data;

  // ---------------- F, B, R, C, W valid chain ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_v <= 1'b0; b_v <= 1'b0; r_v <= 1'b0;
      c_v <= 1'b0; w_v <= 1'b0; ww_v <= 1'b0;
    end else begin
      f_v  <= in_valid;
      b_v  <= f_v;
      r_v  <= b_v;
      c_v  <= r_v;
      w_v  <= c_v;
      ww_v <= w_v;
    end
  end

  always_ff @(posedge clk) begin
    // F: take the operation
    f_op      <= '{op: in_op, addr: {in_elem, in_label}, x: in_x};
    // B: branch decision (operation decoded; unknown codes become reads)
    b_op      <= f_op;
    b_op.op   <= (f_op.op == OP_TRAIN || f_op.op == OP_INIT) ? f_op.op : OP_READ;
    // R: memory read
    r_op      <= b_op;
    mem_q     <= qmem[r_op.addr];
    // C
    c_op      <= r_op;
    // W
    w_op      <= c_op;
    w_data    <= c_result;
    ww_op      <= w_op;
    ww_data    <= w_data;
  end

  // ---------------- C: forwarding and computation ----------------
  always_comb begin
    fwd_c_hit = c_v && w_v && (w_op.addr == c_op.addr);
    fwd_w_hit = c_v && !fwd_c_hit && ww_v && (ww_op.addr == c_op.addr);
    if (fwd_c_hit)      operand = w_data;
    else if (fwd_w_hit) operand = ww_data;
    else                operand = mem_q;
  end

  qset_t q_upd;
  for (genvar k = 0; k < N_QUANT; k++) begin : g_qu
    quantile_unit #(.K(k), .N_QUANT(N_QUANT)) u_qu (
      .q_prev(operand[k]), .x(c_op.x), .q_next(q_upd[k])
    );
  end

  always_comb begin
    case (c_op.op)
      OP_TRAIN: c_result = q_upd;
      OP_INIT:  c_result = '0;
      default:  c_result = operand;
    endcase
  end

  assign rd_valid = c_v && (c_op.op == OP_READ);
  assign rd_label = c_op.addr[LW-1:0];
  assign rd_q     = operand;

  // ---------------- W: write back ----------------
  always_ff @(posedge clk) begin
    if (w_v) qmem[w_op.addr] <= w_data;
  end

  // ---------------- min / max per element ----------------
  logic [EW-1:0] c_elem;
  assign c_elem = c_op.addr[AW-1:LW];

  always_ff @(posedge clk) begin
    if (c_v && c_op.op == OP_INIT) begin
      min_mem[c_elem] <= {1'b0, {(DW-1){1'b1}}};   // most positive
      max_mem[c_elem] <= {1'b1, {(DW-1){1'b0}}};   // most negative
    end else if (c_v && c_op.op == OP_TRAIN) begin
      if ($signed(c_op.x) < $signed(min_mem[c_elem])) min_mem[c_elem] <= c_op.x;
      if ($signed(c_op.x) > $signed(max_mem[c_elem])) max_mem[c_elem] <= c_op.x;
    end
  end

  assign mm_min = min_mem[mm_elem];
  assign mm_max = max_mem[mm_elem];
endmodule
