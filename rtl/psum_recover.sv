// psum_recover: recovery of similar rows and head summation for the output
// of a group of NT tokens (the Recover, FIFO and Adder Tree stages after the
// PE array).
//
// PE lines compute Psums only for critical (token, head) blocks and write
// them with wr_valid/wr_tok/wr_head/wr_psum. A similar row has no Psum of its
// own: within head h it takes the Psum of the critical row it maps to,
// src[t][h] (src[t][h] = t for a critical row). After start, cycle h pushes
// into each token's FIFO the Psum of head h read from row src[t][h]; after H
// pushes the adder tree sums each FIFO and out[t] is the token's output for
// this column.
// Paper: per-head recovery from intra-head similarity into per-token FIFOs,
// eight Psums per FIFO in its example, then an adder tree. This design's
// choices: a Psum store indexed by (token, head), recovery one head per cycle.
// Timing: writes must be complete before start; done pulses H + 1 cycles
// after start and out holds until the next start.
module psum_recover #(
  parameter int unsigned NT     = 16,
  parameter int unsigned H      = 12,
  parameter int unsigned PSUM_W = 32,
  parameter int unsigned OUT_W  = 36,
  localparam int unsigned TW = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned HW = (H > 1) ? $clog2(H) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_valid,
  input  logic [TW-1:0]            wr_tok,
  input  logic [HW-1:0]            wr_head,
  input  logic signed [PSUM_W-1:0] wr_psum,
  input  logic [TW-1:0]            src [NT][H],
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic signed [OUT_W-1:0]  out [NT]
);

  logic signed [PSUM_W-1:0] store [NT][H];
  logic signed [PSUM_W-1:0] fifo  [NT][H];
  logic [HW:0]              h_cnt;
  logic signed [OUT_W-1:0]  tree  [NT];

  // Adder tree over each token's FIFO.
  always_comb begin
    for (int t = 0; t < NT; t++) begin
      tree[t] = '0;
      for (int h = 0; h < H; h++) tree[t] = tree[t] + OUT_W'(fifo[t][h]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      h_cnt <= '0;
      for (int t = 0; t < NT; t++) begin
        out[t] <= '0;
        for (int h = 0; h < H; h++) begin
          store[t][h] <= '0;
          fifo[t][h]  <= '0;
        end
      end
    end else begin
      done <= 1'b0;
      if (wr_valid) store[wr_tok][wr_head] <= wr_psum;
      if (start) begin
        busy  <= 1'b1;
        h_cnt <= '0;
      end else if (busy) begin
        if (h_cnt < (HW+1)'(H)) begin
          // push: FIFO shifts by one and takes head h_cnt's recovered Psum
          for (int t = 0; t < NT; t++) begin
            for (int h = H - 1; h > 0; h--) fifo[t][h] <= fifo[t][h-1];
            fifo[t][0] <= store[src[t][h_cnt[HW-1:0]]][h_cnt[HW-1:0]];
          end
          h_cnt <= h_cnt + 1'b1;
        end else begin
          for (int t = 0; t < NT; t++) out[t] <= tree[t];
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
