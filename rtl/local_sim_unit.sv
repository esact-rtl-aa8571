// local_sim_unit: local similarity computation unit of the sparsity
// prediction module. Works on one window of W rows of the sparsified predicted
// attention (SPA) and decides which rows are critical and which are similar.
//
// Similarity is the L1 distance between two SPA rows. Each of the W lanes has
// K_MAX subtractors. For a reference row c the distance to lane row r is taken
// in two cycles over the union of the two rows' kept positions:
//   phase 0: sum over r's kept positions p of |spa_r[p] - spa_c[p]|
//   phase 1: add, over c's kept positions p that r did not keep, |spa_c[p]|
// References are visited in row order. A row not yet claimed becomes critical,
// and every later unclaimed row with distance <= thr becomes similar to it
// (sim_to = c). A critical row has sim_to equal to its own index. Claimed rows
// are skipped in one cycle.
// The unit also ORs the window's masks into col_active (a zero column of the
// SPA marks a K/V row that need not be generated) and, for the progressive
// generation of K and V, keeps kv_done, the K/V rows generated for earlier
// windows of the same head: at done, kv_new = col_active & ~kv_done is latched
// and kv_done absorbs col_active. head_start clears kv_done.
// Paper: L1 distance, fixed non-overlapping windows, critical/similar
// partition with a row-index map, zero-column pruning of K and V, window-by-
// window KV generation, 8 x 26 subtractors. This design's choices: the greedy
// in-order partition, an integer distance threshold, the two-phase union
// distance.
// Timing: start with the window inputs stable until done; done pulses after at
// most 2*nrows + 1 cycles; outputs hold until the next start.
module local_sim_unit #(
  parameter int unsigned W     = 8,
  parameter int unsigned L     = 128,
  parameter int unsigned K_MAX = 26,
  parameter int unsigned DW    = 16,   // distance width
  localparam int unsigned LW   = $clog2(L),
  localparam int unsigned KW   = $clog2(K_MAX + 1),
  localparam int unsigned IW   = (W > 1) ? $clog2(W) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                head_start,
  input  logic                start,
  input  logic [IW:0]         nrows,          // valid rows in this window (1..W)
  input  logic [KW-1:0]       k,
  input  logic [DW-1:0]       thr,
  input  logic signed [7:0]   spa  [W][L],
  input  logic [L-1:0]        mask [W],
  input  logic [LW-1:0]       idx  [W][K_MAX],
  output logic                busy,
  output logic                done,
  output logic [W-1:0]        crit,
  output logic [IW-1:0]       sim_to [W],
  output logic [L-1:0]        col_active,
  output logic [L-1:0]        kv_new
);

  logic [IW:0]   ref_c;
  logic          phase;
  logic [W-1:0]  claimed;
  logic [DW-1:0] d0 [W];
  logic [DW-1:0] part [W];
  logic [L-1:0]  kv_done;

  function automatic logic [DW-1:0] absdiff(logic signed [7:0] a, logic signed [7:0] b);
    logic signed [8:0] d;
    d = 9'(a) - 9'(b);
    return DW'((d < 0) ? 9'(-d) : d);
  endfunction

  // Per-lane subtractors of the current phase.
  always_comb begin
    for (int r = 0; r < W; r++) begin
      part[r] = '0;
      for (int j = 0; j < K_MAX; j++) begin
        if (KW'(j) < k) begin
          if (!phase) begin
            part[r] = part[r] + absdiff(spa[r][idx[r][j]], spa[ref_c[IW-1:0]][idx[r][j]]);
          end else if (!mask[r][idx[ref_c[IW-1:0]][j]]) begin
            part[r] = part[r] + absdiff(spa[ref_c[IW-1:0]][idx[ref_c[IW-1:0]][j]], 8'sd0);
          end
        end
      end
    end
  end

  always_comb begin
    col_active = '0;
    for (int r = 0; r < W; r++)
      if ((IW+1)'(r) < nrows) col_active = col_active | mask[r];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      ref_c   <= '0;
      phase   <= 1'b0;
      claimed <= '0;
      crit    <= '0;
      kv_done <= '0;
      kv_new  <= '0;
      for (int r = 0; r < W; r++) begin
        d0[r]     <= '0;
        sim_to[r] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (head_start) kv_done <= '0;
      if (start) begin
        busy    <= 1'b1;
        ref_c   <= '0;
        phase   <= 1'b0;
        claimed <= '0;
        crit    <= '0;
        for (int r = 0; r < W; r++) sim_to[r] <= IW'(r);
      end else if (busy) begin
        if (ref_c >= nrows) begin
          busy    <= 1'b0;
          done    <= 1'b1;
          kv_done <= kv_done | col_active;
          kv_new  <= col_active & ~kv_done;
        end else if (claimed[ref_c[IW-1:0]]) begin
          ref_c <= ref_c + 1'b1;               // already similar: skip
        end else if (!phase) begin
          for (int r = 0; r < W; r++) d0[r] <= part[r];
          phase <= 1'b1;
        end else begin
          crit[ref_c[IW-1:0]]    <= 1'b1;
          claimed[ref_c[IW-1:0]] <= 1'b1;
          for (int r = 0; r < W; r++) begin
            if ((IW+1)'(r) > ref_c && (IW+1)'(r) < nrows && !claimed[r]
                && (d0[r] + part[r]) <= thr) begin
              claimed[r] <= 1'b1;
              sim_to[r]  <= ref_c[IW-1:0];
            end
          end
          phase <= 1'b0;
          ref_c <= ref_c + 1'b1;
        end
      end
    end
  end

endmodule
