// pe_array: the NL x NPE PE array (16 lines of 64 PEs) with its two crossbars.
//
// Column crossbar: a weight vector on w_in is loaded into every line whose bit
// in w_load is set. Row crossbar: NSRC input vectors are offered on x_src; line
// l takes source x_sel[l] when x_valid[l] is set. Every line returns its own
// Psum and tag one cycle later (see pe_line). The controller ("Ctr" in the
// paper's figure) that drives the selects lives in the top.
// Paper: 16 x 64 PEs in lines, row and column crossbars, a controller. The
// crossbar form (full multiplexers) is this design's choice.
module pe_array #(
  parameter int unsigned NL     = 16,
  parameter int unsigned NPE    = 64,
  parameter int unsigned NSRC   = 16,
  parameter int unsigned PSUM_W = 32,
  parameter int unsigned TAG_W  = 16,
  localparam int unsigned SW    = (NSRC > 1) ? $clog2(NSRC) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NL-1:0]            w_load,
  input  logic signed [7:0]        w_in  [NPE],
  input  logic signed [7:0]        x_src [NSRC][NPE],
  input  logic [TAG_W-1:0]         tag_src [NSRC],
  input  logic [SW-1:0]            x_sel [NL],
  input  logic [NL-1:0]            x_valid,
  output logic [NL-1:0]            psum_valid,
  output logic signed [PSUM_W-1:0] psum [NL],
  output logic [TAG_W-1:0]         tag_out [NL]
);

  for (genvar l = 0; l < NL; l++) begin : g_line
    logic signed [7:0] x_row [NPE];
    always_comb begin
      for (int i = 0; i < NPE; i++) x_row[i] = x_src[x_sel[l]][i];
    end
    pe_line #(.NPE(NPE), .PSUM_W(PSUM_W), .TAG_W(TAG_W)) u_line (
      .clk, .rst_n,
      .w_load    (w_load[l]),
      .w_in      (w_in),
      .x_valid   (x_valid[l]),
      .x_in      (x_row),
      .tag_in    (tag_src[x_sel[l]]),
      .psum_valid(psum_valid[l]),
      .psum      (psum[l]),
      .tag_out   (tag_out[l])
    );
  end

endmodule
