// sram_buf: on-chip buffer (token, weight or temp buffer) with one write port
// and two read ports, each read returning data one cycle after its address.
//
// The paper's buffers are SRAM macros from a memory compiler: 192 KB weight,
// 192 KB token and 128 KB temp buffers. Here each is a plain array that
// synthesis maps to memory. The word width (64 bytes, one PE-line input) and
// the two read ports (one for the sparsity prediction path, one for the PE
// array) are this design's choices. Defaults: 3072 x 512 bits = 192 KB.
module sram_buf #(
  parameter int unsigned DEPTH = 3072,
  parameter int unsigned WIDTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re_a,
  input  logic [AW-1:0]    raddr_a,
  output logic [WIDTH-1:0] rdata_a,
  input  logic             re_b,
  input  logic [AW-1:0]    raddr_b,
  output logic [WIDTH-1:0] rdata_b
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re_a) rdata_a <= mem[raddr_a];
    if (re_b) rdata_b <= mem[raddr_b];
  end

endmodule
