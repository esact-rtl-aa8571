// mfi_unit: most-frequent-index (MFI) decision for FFN sparsity, one token
// per cycle.
//
// For one token, crit_idx[h] is the in-window row index of the critical vector
// that represents the token in head h (its own index if it is critical in that
// head). The unit counts how often each index occurs over the H heads, takes
// the most frequent one (MFI) with its count, and flags the token as similar
// to the MFI token, so that its FFN rows can be skipped and later copied from
// that token, when the MFI is not the token itself and the count is greater
// than the threshold f.
// Paper: the MFI method and the "count greater than the threshold" rule. This
// design's choices: a tie goes to the token's own index (no skip), otherwise
// to the lowest index; one registered output stage.
// Timing: out_valid follows in_valid by one cycle.
module mfi_unit #(
  parameter int unsigned H  = 12,  // heads
  parameter int unsigned W  = 8,   // window size
  localparam int unsigned IW = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned CW = $clog2(H + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [IW-1:0] own_idx,
  input  logic [IW-1:0] crit_idx [H],
  input  logic [CW-1:0] f_thr,
  output logic          out_valid,
  output logic [IW-1:0] mfi,
  output logic [CW-1:0] count,
  output logic          skip
);

  logic [CW-1:0] cnt [W];
  logic [IW-1:0] best;
  logic [CW-1:0] best_n;

  always_comb begin
    for (int v = 0; v < W; v++) begin
      cnt[v] = '0;
      for (int h = 0; h < H; h++)
        if (crit_idx[h] == IW'(v)) cnt[v] = cnt[v] + 1'b1;
    end
    best   = own_idx;
    best_n = cnt[own_idx];
    for (int v = 0; v < W; v++) begin
      if (cnt[v] > best_n) begin
        best   = IW'(v);
        best_n = cnt[v];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      mfi       <= '0;
      count     <= '0;
      skip      <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        mfi   <= best;
        count <= best_n;
        skip  <= (best != own_idx) && (best_n > f_thr);
      end
    end
  end

endmodule
