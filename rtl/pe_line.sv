// pe_line: one PE line of the PE array: NPE weight-stationary int8 PEs whose
// products are summed by an adder tree into one partial sum (Psum) per cycle.
//
// w_load stores a new weight vector (one weight per PE) that then stays in
// place while input vectors stream through: each cycle with x_valid the line
// computes sum_i x_in[i] * w[i] (a 64-element block of one token against one
// output column, i.e. one head block when NPE = Dh). tag_in travels with the
// data so the consumer knows whose Psum it is.
// Paper: 16 x 64 PE array built from PE lines, weight-stationary dataflow,
// 8-bit operands. This design's choices: one PE per element of the block, an
// adder tree, one register stage.
// Timing: psum_valid / psum / tag_out appear one cycle after x_valid.
module pe_line #(
  parameter int unsigned NPE   = 64,
  parameter int unsigned PSUM_W = 32,
  parameter int unsigned TAG_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_load,
  input  logic signed [7:0]        w_in [NPE],
  input  logic                     x_valid,
  input  logic signed [7:0]        x_in [NPE],
  input  logic [TAG_W-1:0]         tag_in,
  output logic                     psum_valid,
  output logic signed [PSUM_W-1:0] psum,
  output logic [TAG_W-1:0]         tag_out
);

  logic signed [7:0]        w_q [NPE];
  logic signed [PSUM_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < NPE; i++) sum = sum + PSUM_W'(x_in[i] * w_q[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPE; i++) w_q[i] <= '0;
      psum_valid <= 1'b0;
      psum       <= '0;
      tag_out    <= '0;
    end else begin
      if (w_load) for (int i = 0; i < NPE; i++) w_q[i] <= w_in[i];
      psum_valid <= x_valid;
      if (x_valid) begin
        psum    <= sum;
        tag_out <= tag_in;
      end
    end
  end

endmodule
