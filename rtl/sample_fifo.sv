// sample_fifo: synchronous first-word-fall-through FIFO carrying whole
// samples.
//
// It is used twice in the learner: as the streaming sample buffer in front
// of the tree, and as the internal buffer between the tree traversal
// pipeline and the inference/training engines. The second instance absorbs
// the samples that are still inside the tree when the training engine
// pauses for a split trial.
//
// Interface: valid/ready on both sides. A word is written when in_valid and
// in_ready are high on a clock edge and leaves when out_valid and out_ready
// are high. out_data shows the head word whenever out_valid is high (no
// read latency). `count` is the number of words held. Depth and width are
// this design's choice; the original used a vendor FIFO core.
//
// rst_n resets the pointers asynchronously and also disables the handshake
// assertions (disable iff); the lint tool reports that second use as a
// synchronous use of the reset net. The flops themselves use it only as an
// asynchronous reset.
module sample_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count < DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // Handshake rules
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && count == '0));
  assert property (@(posedge clk) disable iff (!rst_n) count <= DEPTH[$clog2(DEPTH+1)-1:0]);
endmodule
