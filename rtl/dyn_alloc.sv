// dyn_alloc: dynamic allocation of head blocks to PE lines for the
// concatenated multi-head attention output.
//
// After concatenation, token t of a group of NT tokens needs the Psum of head h
// only if its row is critical in head h (crit[t][h]); similar rows are
// recovered later from their critical rows. Giving each PE line the blocks of
// its own token would make the slowest line (the token with most critical
// blocks) set the time. The allocator instead:
//   1. counts the critical blocks (compression) and sets the per-line budget
//      T = ceil(total / NL);
//   2. walks the blocks in token-major order, one per cycle, and gives each to
//      the token's own line while that line is under budget, otherwise to the
//      lowest-numbered line still under budget.
// The result is a schedule: line l runs load[l] <= T blocks, slot s holding
// (token sched_tok[l][s], head sched_head[l][s]). makespan = T, and
// naive_makespan reports the unbalanced maximum for comparison.
// Paper: compression of the concatenated map, counters that assign critical
// paths, shorter critical path. The budget rule and the order of the walk are
// this design's choices.
// Timing: start samples crit; done pulses NT*H + 2 cycles later.
module dyn_alloc #(
  parameter int unsigned NT = 16,   // tokens per group (one per PE line)
  parameter int unsigned NL = 16,   // PE lines
  parameter int unsigned H  = 12,   // heads
  localparam int unsigned TW = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned HW = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned LW = (NL > 1) ? $clog2(NL) : 1,
  localparam int unsigned NW = $clog2(NT * H + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [H-1:0]     crit [NT],
  output logic             busy,
  output logic             done,
  output logic [NW-1:0]    total,
  output logic [NW-1:0]    makespan,
  output logic [NW-1:0]    naive_makespan,
  output logic [NW-1:0]    load [NL],
  output logic [TW-1:0]    sched_tok  [NL][H * NT / NL + H],
  output logic [HW-1:0]    sched_head [NL][H * NT / NL + H]
);

  localparam int unsigned SLOTS = H * NT / NL + H;

  typedef enum logic [1:0] {S_IDLE, S_COUNT, S_WALK} state_e;
  state_e state;

  logic [H-1:0]  crit_q [NT];
  logic [TW-1:0] t_ptr;
  logic [HW-1:0] h_ptr;
  logic [NW-1:0] tot_c, naive_c;
  logic [LW-1:0] free_l;
  logic          free_any;

  function automatic logic [NW-1:0] popcnt(logic [H-1:0] v);
    logic [NW-1:0] n;
    n = '0;
    for (int i = 0; i < H; i++) n = n + NW'(v[i]);
    return n;
  endfunction

  // Compression: count all critical blocks and the largest per-token count.
  always_comb begin
    tot_c   = '0;
    naive_c = '0;
    for (int t = 0; t < NT; t++) begin
      tot_c = tot_c + popcnt(crit_q[t]);
      if (popcnt(crit_q[t]) > naive_c) naive_c = popcnt(crit_q[t]);
    end
  end

  // Lowest line still under budget.
  always_comb begin
    free_l   = '0;
    free_any = 1'b0;
    for (int l = NL - 1; l >= 0; l--) begin
      if (load[l] < makespan) begin
        free_l   = LW'(l);
        free_any = 1'b1;
      end
    end
  end

  logic [LW-1:0] own_l, dst_l;
  always_comb begin
    own_l = LW'(32'(t_ptr) % NL);
    dst_l = (load[own_l] < makespan || !free_any) ? own_l : free_l;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      busy           <= 1'b0;
      done           <= 1'b0;
      t_ptr          <= '0;
      h_ptr          <= '0;
      total          <= '0;
      makespan       <= '0;
      naive_makespan <= '0;
      for (int t = 0; t < NT; t++) crit_q[t] <= '0;
      for (int l = 0; l < NL; l++) begin
        load[l] <= '0;
        for (int s = 0; s < SLOTS; s++) begin
          sched_tok[l][s]  <= '0;
          sched_head[l][s] <= '0;
        end
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int t = 0; t < NT; t++) crit_q[t] <= crit[t];
          for (int l = 0; l < NL; l++) load[l] <= '0;
          t_ptr <= '0;
          h_ptr <= '0;
          busy  <= 1'b1;
          state <= S_COUNT;
        end
        S_COUNT: begin
          total          <= tot_c;
          naive_makespan <= naive_c;
          makespan       <= NW'((32'(tot_c) + NL - 1) / NL);
          state          <= S_WALK;
        end
        S_WALK: begin
          // One (token, head) position per cycle; non-critical ones assign nothing.
          if (crit_q[t_ptr][h_ptr]) begin
            sched_tok[dst_l][load[dst_l][$clog2(SLOTS)-1:0]]  <= t_ptr;
            sched_head[dst_l][load[dst_l][$clog2(SLOTS)-1:0]] <= h_ptr;
            load[dst_l] <= load[dst_l] + 1'b1;
          end
          if (h_ptr == HW'(H - 1)) begin
            h_ptr <= '0;
            if (t_ptr == TW'(NT - 1)) begin
              state <= S_IDLE;
              busy  <= 1'b0;
              done  <= 1'b1;
            end else begin
              t_ptr <= t_ptr + 1'b1;
            end
          end else begin
            h_ptr <= h_ptr + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
