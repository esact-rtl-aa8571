// topk_unit: row-wise top-k pruning of one row of the predicted attention
// matrix (part of the functional module). Turns a PAM row into a row of the
// sparsified predicted attention (SPA).
//
// start latches a row of L signed 8-bit scores and the run-time k (1..K_MAX).
// The unit then selects one element per cycle: the largest score not yet
// selected, the lowest index winning a tie. After k cycles, done pulses for one
// cycle and mask marks the kept positions, spa holds the kept scores (0
// elsewhere) and idx lists the kept positions in selection order (entries at or
// above k are 0). Outputs hold until the next start.
// The paper gives the function (row-wise top-k) and the upper bound
// k <= 0.2 L used for synthesis (26 for L = 128); the one-per-cycle selection
// is this design's choice.
module topk_unit #(
  parameter int unsigned L     = 128,
  parameter int unsigned K_MAX = 26,
  localparam int unsigned LW   = $clog2(L),
  localparam int unsigned KW   = $clog2(K_MAX + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [KW-1:0]        k,
  input  logic signed [7:0]    row [L],
  output logic                 busy,
  output logic                 done,
  output logic [L-1:0]         mask,
  output logic signed [7:0]    spa [L],
  output logic [LW-1:0]        idx [K_MAX]
);

  logic signed [7:0] row_q [L];
  logic [KW-1:0]     k_q, n_sel;
  logic [LW-1:0]     best_i;
  logic              any;

  // Argmax over the elements not yet selected.
  always_comb begin
    logic signed [7:0] best_v;
    best_v = -8'sd128;
    best_i = '0;
    any    = 1'b0;
    for (int i = 0; i < L; i++) begin
      if (!mask[i] && (!any || row_q[i] > best_v)) begin
        best_v = row_q[i];
        best_i = LW'(i);
        any    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      mask  <= '0;
      k_q   <= '0;
      n_sel <= '0;
      for (int i = 0; i < L; i++) row_q[i] <= '0;
      for (int j = 0; j < K_MAX; j++) idx[j] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        mask  <= '0;
        k_q   <= (k > KW'(K_MAX)) ? KW'(K_MAX) : k;
        n_sel <= '0;
        for (int i = 0; i < L; i++) row_q[i] <= row[i];
        for (int j = 0; j < K_MAX; j++) idx[j] <= '0;
      end else if (busy) begin
        if (n_sel < k_q && any) begin
          mask[best_i] <= 1'b1;
          idx[n_sel]   <= best_i;
          n_sel        <= n_sel + 1'b1;
        end
        if (n_sel + 1'b1 >= k_q || !any) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < L; i++) spa[i] = mask[i] ? row_q[i] : 8'sd0;
  end

endmodule
