// histogram_learner: histogram learning for one categorical attribute,
// shared by all elements and classes.
//
// For every element (leaf slot), class j and attribute value v the learner
// counts the samples seen. The counts are split across ceil(N_VAL/2)
// memories, each holding two attribute values side by side; the value of
// the incoming attribute enables the memory (v/2) and the half (v%2) to
// use, and {element, class} is the address. A split-trial read therefore
// returns every value of one class in one cycle.
//
// A status table holds one bit per (value, class) for each element. A new
// element is initialised by clearing its status word in a single write,
// instead of clearing every histogram entry. A training sample whose status
// bit is 0 writes 1 into its counter and sets the bit (initialisation
// state); with the bit at 1 the counter is incremented (increment state).
// A read-out returns 0 for entries whose status bit is 0. This follows the
// original's status-table scheme; keeping one bit per value and class (so
// that counts of other values are not trusted after the first sample) is
// this design's reading of it.
//
// Operations (learn_op_e), one per cycle: OP_TRAIN (elem, label, value),
// OP_INIT (elem), OP_READ (elem, label). The operation is registered on
// input and executed in the next cycle (status and counts are read and
// written in that cycle, so back-to-back samples need no forwarding);
// rd_valid/rd_hist appear one cycle after the OP_READ is taken. Counts
// saturate at 2^CW-1.
module histogram_learner
  import hodt_pkg::*;
#(
  parameter int N_VAL   = 7,
  parameter int N_LABEL = 2,
  parameter int N_ELEM  = 1024
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                          in_valid,
  input  learn_op_e                     in_op,
  input  logic [$clog2(N_ELEM)-1:0]     in_elem,
  input  logic [$clog2(N_LABEL)-1:0]    in_label,
  input  logic [$clog2(N_VAL)-1:0]      in_value,
  output logic                          rd_valid,
  output logic [$clog2(N_LABEL)-1:0]    rd_label,
  output logic [N_VAL-1:0][CW-1:0]      rd_hist,
  output logic                          init_hit     // a counter started from its status bit
);
  localparam int EW   = $clog2(N_ELEM);
  localparam int LW   = $clog2(N_LABEL);
  localparam int VW   = $clog2(N_VAL);
  localparam int NRAM = (N_VAL + 1) / 2;
  localparam int AW   = EW + LW;
  localparam int RW   = (NRAM > 1) ? $clog2(NRAM) : 1;

  logic [1:0][CW-1:0]         hmem [NRAM][N_ELEM << LW];   // address {element, class}
  logic [N_VAL*N_LABEL-1:0]   status [N_ELEM];

  logic          s_v;
  learn_op_e     s_op;
  logic [EW-1:0] s_elem;
  logic [LW-1:0] s_label;
  logic [VW-1:0] s_value;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s_v <= 1'b0;
    else        s_v <= in_valid;
  end
  always_ff @(posedge clk) begin
    s_op    <= in_op;
    s_elem  <= in_elem;
    s_label <= in_label;
    s_value <= in_value;
  end

  logic [AW-1:0]            addr;
  logic [N_VAL*N_LABEL-1:0] st_word;
  int                       bit_idx;
  logic                     st_bit;
  logic [CW-1:0]            cur, nxt;
  logic [RW-1:0]            ram_sel;

  always_comb begin
    addr    = {s_elem, s_label};
    st_word = status[s_elem];
    bit_idx = int'(s_value) * N_LABEL + int'(s_label);
    st_bit  = st_word[bit_idx];
    ram_sel = RW'(s_value >> 1);
    cur     = hmem[ram_sel][addr][s_value[0]];
    if (!st_bit)        nxt = CW'(1);
    else if (cur != '1) nxt = cur + 1'b1;
    else                nxt = cur;
    init_hit = s_v && (s_op == OP_TRAIN) && !st_bit;
  end

  always_ff @(posedge clk) begin
    if (s_v && s_op == OP_TRAIN && 32'(s_value) < N_VAL) begin
      hmem[ram_sel][addr][s_value[0]] <= nxt;
      status[s_elem][bit_idx]         <= 1'b1;
    end else if (s_v && s_op == OP_INIT) begin
      status[s_elem] <= '0;
    end
  end

  // read-out: all values of one (element, class)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= s_v && (s_op == OP_READ);
  end
  always_ff @(posedge clk) begin
    rd_label <= s_label;
    for (int v = 0; v < N_VAL; v++)
      rd_hist[v] <= st_word[v * N_LABEL + int'(s_label)] ? hmem[v / 2][addr][v % 2] : '0;
  end
endmodule
