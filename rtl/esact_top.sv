// esact_top: the ESACT accelerator for one transformer layer's multi-head
// attention front end, processed head by head.
//
// Main idea: before Q, K and V are computed for real, an addition-only
// low-precision prediction (HLog quantization) of the attention matrix is
// made, pruned row-wise to its top k, and compared row against row inside
// fixed windows of W = 8 tokens. Rows that look like an earlier row of their
// window need no Q of their own; columns that no row of the window keeps need
// no K and V row. The PE array then generates only what is needed.
//
// Per head (start .. done):
//   Kp   : predicted K for all tokens, window by window, on the bit-level
//          prediction unit (8 tokens x Dh columns, reduction over D).
//   per window w (the progressive generation scheme):
//     Qpw : predicted Q of the window's 8 tokens
//     Apw : predicted attention of the window, 8 x L, reduction over Dh
//     top-k of each row -> SPA, then the local similarity unit -> critical
//           rows, similar-to map, new K/V rows (active columns not yet made)
//     the result is handed to the generation engine, and the prediction of
//     window w+1 starts while the PE array generates window w's Q rows and
//     newly needed K/V rows (the overlap that hides the prediction latency).
//   Formal generation (PE array, weight-stationary): for each matrix, each
//   group of 16 output columns and each 64-element block of the embedding, the
//   16 lines load one weight column block each, then the selected tokens stream
//   through; Psums are accumulated in the temp buffer (read-modify-write).
// After all heads: mfi_start runs the MFI unit over the stored per-head
// similar-to maps and gives the FFN skip mask (ffn_skip, ffn_src). da_start
// runs the dynamic allocator on the critical-block map of one group of 16
// tokens and exposes the PE-line schedule; the recovery unit rebuilds similar
// rows' Psums of that group from the stored maps and sums the heads. The
// Psums of the concatenated attention output are written into it from outside
// (rc_wr_*): attention computation itself (QK^T, softmax, AV), layer norm and
// the FFN are not part of this RTL.
//
// Buffer layouts (64-byte words; this design's choice):
//   token  buffer: addr t*KB + kb           byte i = X[t][kb*64 + i]
//   weight buffer: addr (m*DH + n)*KB + kb   byte i = W_m[kb*64 + i][head col n]
//                  m = 0 Q, 1 K, 2 V (one head's slices, loaded per head)
//   temp   buffer: addr (m*L + t)*CT + ct    lane j (32 bits) = out_m[t][ct*16 + j]
// The host writes the token and weight buffers (the external memory side) and
// reads the temp buffer between runs.
//
// Follows the paper: the block structure (SRAM, sparsity prediction module
// with bit-level prediction unit and local similarity unit, functional module
// top-k, 16 x 64 PE array with crossbars), the Kp -> (Qpw, Apw, Sw) -> QKV
// order, progressive K/V generation, sizes (8 x 128 prediction array, W = 8,
// k <= 26 for L = 128, 16 x 64 PEs, 192/192/128 KB buffers).
// This design's own choices: buffer word layouts, the sequential load-then-
// compute tiling of the prediction unit (64 load cycles per 64 compute cycles),
// requantization by a right shift, the integer similarity threshold, a
// one-entry hand-off between prediction and generation, per-head runs
// controlled by the host.
// Some sub-block outputs are left unread on purpose: the full-precision
// accumulators of the prediction unit (only the int8 view is used), the busy
// flags of blocks whose done pulse is used instead, the local similarity
// unit's col_active (kv_new is what generation needs), one address bit of a
// weight read port, the psum valid/tag of lines 1..15 (line 0 stands for all,
// they run in lock step), the MFI count and the allocator's total.
module esact_top
  import esact_pkg::*;
#(
  parameter int unsigned L      = 128,   // sequence length
  parameter int unsigned D      = 768,   // embedding dimension
  parameter int unsigned DH     = 64,    // head dimension (= PEs per line)
  parameter int unsigned H      = 12,    // heads
  parameter int unsigned W      = 8,     // similarity window
  parameter int unsigned K_MAX  = 26,    // top-k upper bound (0.2 L)
  parameter int unsigned NL     = 16,    // PE lines
  parameter int unsigned BC     = 128,   // prediction array columns (>= L, >= DH)
  parameter int unsigned CNT_W  = 11,    // converter counter width
  parameter int unsigned TOK_DEPTH = 3072,  // 192 KB
  parameter int unsigned WGT_DEPTH = 3072,  // 192 KB
  parameter int unsigned TMP_DEPTH = 2048,  // 128 KB
  localparam int unsigned NPE   = DH,
  localparam int unsigned KB    = D / NPE,
  localparam int unsigned CT    = DH / NL,
  localparam int unsigned NG    = (L + NL - 1) / NL,
  localparam int unsigned LW    = $clog2(L),
  localparam int unsigned IW    = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned HW    = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned KW    = $clog2(K_MAX + 1),
  localparam int unsigned TAW   = $clog2(TOK_DEPTH),
  localparam int unsigned WAW   = $clog2(WGT_DEPTH),
  localparam int unsigned MAW   = $clog2(TMP_DEPTH),
  localparam int unsigned GW    = (NG > 1) ? $clog2(NG) : 1,
  localparam int unsigned NTW   = (NL > 1) ? $clog2(NL) : 1,
  localparam int unsigned NW    = $clog2(NL * H + 1),
  localparam int unsigned SLOTS = H * NL / NL + H,
  localparam int unsigned BW    = NPE * 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // external memory side: buffer fills and result read-back
  input  logic                 tok_we,
  input  logic [TAW-1:0]       tok_waddr,
  input  logic [BW-1:0]        tok_wdata,
  input  logic                 wgt_we,
  input  logic [WAW-1:0]       wgt_waddr,
  input  logic [BW-1:0]        wgt_wdata,
  input  logic                 tmp_re,
  input  logic [MAW-1:0]       tmp_raddr,
  output logic [BW-1:0]        tmp_rdata,
  // configuration of a head run
  input  logic [HW-1:0]        cfg_head,
  input  logic [LW:0]          cfg_ntok,      // tokens (1..L)
  input  logic [KW-1:0]        cfg_k,         // top-k (1..K_MAX)
  input  logic [15:0]          cfg_sim_thr,   // L1 distance threshold
  input  logic [4:0]           cfg_qk_shift,  // requantization of predicted Q/K
  input  logic [4:0]           cfg_att_shift, // requantization of predicted attention
  input  logic [$clog2(H+1)-1:0] cfg_ffn_thr, // MFI count threshold f
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // per-window result of the sparsity prediction
  output logic                 win_valid,
  output logic [LW-1:0]        win_base,
  output logic [W-1:0]         win_crit,
  output logic [IW-1:0]        win_sim_to [W],
  output logic [L-1:0]         win_kv_new,
  // activity counters of the last head run
  output logic [31:0]          stat_cycles,
  output logic [31:0]          stat_overlap,   // cycles with prediction and generation both busy
  output logic [31:0]          stat_q_rows,    // Q rows generated
  output logic [31:0]          stat_kv_rows,   // K/V rows generated (each of K and V)
  // FFN sparsity (MFI)
  input  logic                 mfi_start,
  output logic                 mfi_done,
  output logic [L-1:0]         ffn_skip,
  output logic [LW-1:0]        ffn_src [L],
  // dynamic allocation and recovery of the concatenated output, one group
  input  logic                 da_start,
  input  logic [GW-1:0]        da_group,
  output logic                 da_done,
  output logic [NW-1:0]        da_makespan,
  output logic [NW-1:0]        da_naive_makespan,
  output logic [NW-1:0]        da_load [NL],
  output logic [NTW-1:0]       da_sched_tok  [NL][SLOTS],
  output logic [HW-1:0]        da_sched_head [NL][SLOTS],
  input  logic                 rc_wr_valid,
  input  logic [NTW-1:0]       rc_wr_tok,
  input  logic [HW-1:0]        rc_wr_head,
  input  logic signed [31:0]   rc_wr_psum,
  input  logic                 rc_start,
  output logic                 rc_done,
  output logic signed [35:0]   rc_out [NL]
);

  // ------------------------------------------------------------------ buffers
  logic              tok_re_a, tok_re_b, wgt_re_a, wgt_re_b, tmp_re_a, tmp_we;
  logic [TAW-1:0]    tok_ra_a, tok_ra_b;
  logic [WAW-1:0]    wgt_ra_a, wgt_ra_b;
  logic [MAW-1:0]    tmp_ra_a, tmp_wa;
  logic [BW-1:0]     tok_rd_a, tok_rd_b, wgt_rd_a, wgt_rd_b, tmp_rd_a, tmp_wd;

  sram_buf #(.DEPTH(TOK_DEPTH), .WIDTH(BW)) u_token_buf (
    .clk, .we(tok_we), .waddr(tok_waddr), .wdata(tok_wdata),
    .re_a(tok_re_a), .raddr_a(tok_ra_a), .rdata_a(tok_rd_a),
    .re_b(tok_re_b), .raddr_b(tok_ra_b), .rdata_b(tok_rd_b));
  sram_buf #(.DEPTH(WGT_DEPTH), .WIDTH(BW)) u_weight_buf (
    .clk, .we(wgt_we), .waddr(wgt_waddr), .wdata(wgt_wdata),
    .re_a(wgt_re_a), .raddr_a(wgt_ra_a), .rdata_a(wgt_rd_a),
    .re_b(wgt_re_b), .raddr_b(wgt_ra_b), .rdata_b(wgt_rd_b));
  sram_buf #(.DEPTH(TMP_DEPTH), .WIDTH(BW)) u_temp_buf (
    .clk, .we(tmp_we), .waddr(tmp_wa), .wdata(tmp_wd),
    .re_a(tmp_re_a), .raddr_a(tmp_ra_a), .rdata_a(tmp_rd_a),
    .re_b(tmp_re), .raddr_b(tmp_raddr), .rdata_b(tmp_rdata));

  // ------------------------------------------------- bit-level prediction unit
  logic                    bl_clear, bl_valid;
  logic signed [7:0]       bl_row [W];
  logic signed [7:0]       bl_col [BC];
  logic [4:0]              bl_shift;
  logic signed [31:0]      bl_acc [W][BC];
  logic signed [7:0]       bl_q8  [W][BC];

  bit_level_pred_unit #(.R(W), .C(BC), .CNT_W(CNT_W), .ACC_W(32)) u_blpu (
    .clk, .rst_n, .clear(bl_clear), .in_valid(bl_valid), .row_data(bl_row),
    .col_data(bl_col), .shift(bl_shift), .acc(bl_acc), .q8(bl_q8));

  // ------------------------------------------------------- top-k and similarity
  logic                    tk_start, tk_busy, tk_done;
  logic signed [7:0]       tk_row [L];
  logic [L-1:0]            tk_mask;
  logic signed [7:0]       tk_spa [L];
  logic [LW-1:0]           tk_idx [K_MAX];

  topk_unit #(.L(L), .K_MAX(K_MAX)) u_topk (
    .clk, .rst_n, .start(tk_start), .k(cfg_k), .row(tk_row), .busy(tk_busy),
    .done(tk_done), .mask(tk_mask), .spa(tk_spa), .idx(tk_idx));

  logic                    ls_head_start, ls_start, ls_busy, ls_done;
  logic [IW:0]             ls_nrows;
  logic signed [7:0]       spa_w  [W][L];
  logic [L-1:0]            mask_w [W];
  logic [LW-1:0]           idx_w  [W][K_MAX];
  logic [W-1:0]            ls_crit;
  logic [IW-1:0]           ls_sim_to [W];
  logic [L-1:0]            ls_col_active, ls_kv_new;

  local_sim_unit #(.W(W), .L(L), .K_MAX(K_MAX), .DW(16)) u_lsim (
    .clk, .rst_n, .head_start(ls_head_start), .start(ls_start), .nrows(ls_nrows),
    .k(cfg_k), .thr(cfg_sim_thr), .spa(spa_w), .mask(mask_w), .idx(idx_w),
    .busy(ls_busy), .done(ls_done), .crit(ls_crit), .sim_to(ls_sim_to),
    .col_active(ls_col_active), .kv_new(ls_kv_new));

  // ---------------------------------------------------------- prediction FSM
  typedef enum logic [3:0] {
    P_IDLE, P_LOAD, P_CMP, P_STORE, P_ATT, P_ATT_END, P_TOPK, P_TOPK_WAIT,
    P_SIM, P_SIM_WAIT, P_HAND, P_FINISH
  } pstate_e;
  pstate_e ps;

  logic                    kp_phase;          // 1: Kp pass, 0: Qpw of a window
  logic [LW:0]             win;               // window index
  logic [$clog2(KB)-1:0]   kb_p;
  logic [6:0]              cnt_p;             // load / compute step (0..NPE)
  logic [IW:0]             row_p;
  logic signed [7:0]       tile_x [W][NPE];   // token tile: W tokens x 64 k
  logic signed [7:0]       tile_w [DH][NPE];  // weight tile: Dh columns x 64 k
  logic signed [7:0]       kp [L][DH];        // predicted K (int8)
  logic signed [7:0]       qp [W][DH];        // predicted Q of the window
  logic [LW:0]             ntok;
  logic [IW:0]             nrows_w;
  logic                    tok_rv_a, wgt_rv_a;
  logic [IW:0]             tok_rr_a;
  logic [6:0]              wgt_rr_a;

  // hand-off to the generation engine
  logic                    job_full;
  logic [LW-1:0]           job_base;
  logic [W-1:0]            job_crit;
  logic [IW:0]             job_nrows;
  logic [L-1:0]            job_kv;
  logic                    job_take;
  logic                    gen_busy;

  // per-head similarity maps for MFI, dynamic allocation and recovery
  logic [IW-1:0]           simmap  [H][L];
  logic                    critmap [H][L];
  logic [HW-1:0]           head_q;

  function automatic logic signed [7:0] byte_of(logic [BW-1:0] wd, int i);
    return wd[i*8 +: 8];
  endfunction

  always_comb begin
    nrows_w = ((32'(win) + 1) * W <= 32'(ntok)) ? (IW+1)'(W)
                                               : (IW+1)'(32'(ntok) - 32'(win) * W);
  end

  // Prediction unit operands.
  always_comb begin
    for (int r = 0; r < W; r++) bl_row[r] = '0;
    for (int c = 0; c < BC; c++) bl_col[c] = '0;
    if (ps == P_CMP) begin
      for (int r = 0; r < W; r++) bl_row[r] = tile_x[r][cnt_p[5:0]];
      for (int c = 0; c < DH; c++) bl_col[c] = tile_w[c][cnt_p[5:0]];
    end else if (ps == P_ATT) begin
      for (int r = 0; r < W; r++) bl_row[r] = qp[r][cnt_p[$clog2(DH)-1:0]];
      for (int c = 0; c < L; c++)
        if (c < ntok) bl_col[c] = kp[c][cnt_p[$clog2(DH)-1:0]];
    end
  end
  // Clear the converters while a finished tile is stored (its q8 is read in
  // that cycle) and before the first tile of a pass.
  assign bl_clear = (ps == P_STORE) || (ps == P_LOAD && kb_p == '0 && cnt_p == '0);
  assign bl_valid = (ps == P_CMP && cnt_p < 7'(NPE)) || (ps == P_ATT && cnt_p < 7'(DH));
  assign bl_shift = (ps == P_ATT || ps == P_ATT_END || ps == P_TOPK || ps == P_TOPK_WAIT)
                    ? cfg_att_shift : cfg_qk_shift;

  // Top-k row input: predicted attention, columns past the last token masked.
  always_comb begin
    for (int c = 0; c < L; c++)
      tk_row[c] = (c < ntok) ? bl_q8[row_p[IW-1:0]][c] : -8'sd128;
  end

  // Buffer read addresses of the prediction path.
  always_comb begin
    tok_re_a = 1'b0;
    tok_ra_a = '0;
    wgt_re_a = 1'b0;
    wgt_ra_a = '0;
    if (ps == P_LOAD) begin
      if (cnt_p < 7'(W)) begin
        tok_re_a = 1'b1;
        tok_ra_a = TAW'((32'(win) * W + 32'(cnt_p)) * KB + 32'(kb_p));
      end
      if (cnt_p < 7'(DH)) begin
        wgt_re_a = 1'b1;
        wgt_ra_a = WAW'(((kp_phase ? 32'(1) : 32'(0)) * DH + 32'(cnt_p)) * KB + 32'(kb_p));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps            <= P_IDLE;
      busy          <= 1'b0;
      done          <= 1'b0;
      kp_phase      <= 1'b0;
      win           <= '0;
      kb_p          <= '0;
      cnt_p         <= '0;
      row_p         <= '0;
      ntok          <= '0;
      head_q        <= '0;
      tk_start      <= 1'b0;
      ls_start      <= 1'b0;
      ls_head_start <= 1'b0;
      ls_nrows      <= '0;
      tok_rv_a      <= 1'b0;
      wgt_rv_a      <= 1'b0;
      tok_rr_a      <= '0;
      wgt_rr_a      <= '0;
      job_full      <= 1'b0;
      job_base      <= '0;
      job_crit      <= '0;
      job_nrows     <= '0;
      job_kv        <= '0;
      win_valid     <= 1'b0;
      win_base      <= '0;
      win_crit      <= '0;
      win_kv_new    <= '0;
      for (int r = 0; r < W; r++) begin
        win_sim_to[r] <= '0;
        mask_w[r]     <= '0;
        for (int i = 0; i < NPE; i++) tile_x[r][i] <= '0;
        for (int i = 0; i < DH; i++) qp[r][i] <= '0;
        for (int i = 0; i < L; i++) spa_w[r][i] <= '0;
        for (int j = 0; j < K_MAX; j++) idx_w[r][j] <= '0;
      end
      for (int c = 0; c < DH; c++)
        for (int i = 0; i < NPE; i++) tile_w[c][i] <= '0;
      for (int t = 0; t < L; t++)
        for (int i = 0; i < DH; i++) kp[t][i] <= '0;
      for (int h = 0; h < H; h++)
        for (int t = 0; t < L; t++) begin
          simmap[h][t]  <= IW'(t % W);
          critmap[h][t] <= 1'b1;
        end
    end else begin
      done          <= 1'b0;
      tk_start      <= 1'b0;
      ls_start      <= 1'b0;
      ls_head_start <= 1'b0;
      win_valid     <= 1'b0;
      if (job_take) job_full <= 1'b0;

      // read data capture (one cycle after the address)
      tok_rv_a <= tok_re_a;
      wgt_rv_a <= wgt_re_a;
      tok_rr_a <= (IW+1)'(cnt_p);
      wgt_rr_a <= cnt_p;
      if (tok_rv_a)
        for (int i = 0; i < NPE; i++)
          tile_x[tok_rr_a[IW-1:0]][i] <= ((32'(win) * W + 32'(tok_rr_a)) < 32'(ntok))
                                         ? byte_of(tok_rd_a, i) : 8'sd0;
      if (wgt_rv_a)
        for (int i = 0; i < NPE; i++) tile_w[wgt_rr_a[$clog2(DH)-1:0]][i] <= byte_of(wgt_rd_a, i);

      unique case (ps)
        P_IDLE: if (start) begin
          busy          <= 1'b1;
          ntok          <= cfg_ntok;
          head_q        <= cfg_head;
          ls_head_start <= 1'b1;
          kp_phase      <= 1'b1;
          win           <= '0;
          kb_p          <= '0;
          cnt_p         <= '0;
          ps            <= P_LOAD;
        end
        // load a 64-k tile: W token words and DH weight words, one per cycle
        P_LOAD: begin
          if (cnt_p == 7'(DH)) begin
            cnt_p <= '0;
            ps    <= P_CMP;
          end else begin
            cnt_p <= cnt_p + 1'b1;
          end
        end
        // 64 reduction steps on the prediction unit
        P_CMP: begin
          if (cnt_p == 7'(NPE - 1)) begin
            cnt_p <= '0;
            if (kb_p == $clog2(KB)'(KB - 1)) begin
              kb_p <= '0;
              ps   <= P_STORE;
            end else begin
              kb_p <= kb_p + 1'b1;
              ps   <= P_LOAD;
            end
          end else begin
            cnt_p <= cnt_p + 1'b1;
          end
        end
        // store the requantized tile as predicted K (Kp pass) or Q (window)
        P_STORE: begin
          if (kp_phase) begin
            for (int r = 0; r < W; r++)
              for (int c = 0; c < DH; c++)
                if (32'(win) * W + r < L) kp[32'(win) * W + r][c] <= bl_q8[r][c];
            if (32'(win) + 1 >= (32'(ntok) + W - 1) / W) begin
              kp_phase <= 1'b0;
              win      <= '0;
            end else begin
              win <= win + 1'b1;
            end
            ps <= P_LOAD;
          end else begin
            for (int r = 0; r < W; r++)
              for (int c = 0; c < DH; c++) qp[r][c] <= bl_q8[r][c];
            ps <= P_ATT;
          end
        end
        // predicted attention of the window: Dh reduction steps
        P_ATT: begin
          if (cnt_p == 7'(DH - 1)) begin
            cnt_p <= '0;
            ps    <= P_ATT_END;
          end else begin
            cnt_p <= cnt_p + 1'b1;
          end
        end
        P_ATT_END: begin
          row_p <= '0;
          ps    <= P_TOPK;
        end
        P_TOPK: begin
          tk_start <= 1'b1;
          ps       <= P_TOPK_WAIT;
        end
        P_TOPK_WAIT: if (tk_done) begin
          for (int i = 0; i < L; i++) spa_w[row_p[IW-1:0]][i] <= tk_spa[i];
          mask_w[row_p[IW-1:0]] <= tk_mask;
          for (int j = 0; j < K_MAX; j++) idx_w[row_p[IW-1:0]][j] <= tk_idx[j];
          if (row_p + 1'b1 >= nrows_w) begin
            ps <= P_SIM;
          end else begin
            row_p <= row_p + 1'b1;
            ps    <= P_TOPK;
          end
        end
        P_SIM: begin
          for (int r = 0; r < W; r++)
            if (r >= nrows_w) mask_w[r] <= '0;
          ls_nrows <= nrows_w;
          ls_start <= 1'b1;
          ps       <= P_SIM_WAIT;
        end
        P_SIM_WAIT: if (ls_done) ps <= P_HAND;
        // hand the window to the generation engine once it has taken the last one
        P_HAND: if (!job_full || job_take) begin
          job_full   <= 1'b1;
          job_base   <= LW'(32'(win) * W);
          job_crit   <= ls_crit;
          job_nrows  <= nrows_w;
          job_kv     <= ls_kv_new;
          win_valid  <= 1'b1;
          win_base   <= LW'(32'(win) * W);
          win_crit   <= ls_crit;
          win_kv_new <= ls_kv_new;
          for (int r = 0; r < W; r++) begin
            win_sim_to[r] <= ls_sim_to[r];
            if (32'(win) * W + r < L && r < nrows_w) begin
              simmap[head_q][32'(win) * W + r]  <= ls_sim_to[r];
              critmap[head_q][32'(win) * W + r] <= ls_crit[r];
            end
          end
          if (32'(win) + 1 >= (32'(ntok) + W - 1) / W) begin
            ps <= P_FINISH;
          end else begin
            win   <= win + 1'b1;
            kb_p  <= '0;
            cnt_p <= '0;
            ps    <= P_LOAD;
          end
        end
        P_FINISH: if (!job_full && !gen_busy) begin
          busy <= 1'b0;
          done <= 1'b1;
          ps   <= P_IDLE;
        end
        default: ps <= P_IDLE;
      endcase
    end
  end

  // --------------------------------------------------------------- PE array
  logic [NL-1:0]           pa_w_load, pa_x_valid, pa_psum_valid;
  logic signed [7:0]       pa_w_in [NPE];
  logic signed [7:0]       pa_x_src [1][NPE];
  logic [15:0]             pa_tag_src [1];
  logic [0:0]              pa_x_sel [NL];
  logic signed [31:0]      pa_psum [NL];
  logic [15:0]             pa_tag_out [NL];

  pe_array #(.NL(NL), .NPE(NPE), .NSRC(1), .PSUM_W(32), .TAG_W(16)) u_pe_array (
    .clk, .rst_n, .w_load(pa_w_load), .w_in(pa_w_in), .x_src(pa_x_src),
    .tag_src(pa_tag_src), .x_sel(pa_x_sel), .x_valid(pa_x_valid),
    .psum_valid(pa_psum_valid), .psum(pa_psum), .tag_out(pa_tag_out));

  always_comb begin
    for (int l = 0; l < NL; l++) pa_x_sel[l] = 1'b0;   // one source, broadcast
  end

  // ---------------------------------------------------------- generation FSM
  typedef enum logic [2:0] {G_IDLE, G_SETUP, G_LDW, G_STREAM, G_DRAIN, G_NEXT} gstate_e;
  gstate_e gs;
  logic [1:0]              g_mat;
  logic [$clog2(CT+1)-1:0] g_ct;
  logic [$clog2(KB)-1:0]   g_kb;
  logic [4:0]              g_cnt;
  logic [L-1:0]            g_qset, g_kvset, g_rem;
  logic [LW-1:0]           g_tok;
  logic                    g_any;
  logic                    g_wv;     // weight read data valid
  logic [NTW-1:0]          g_wl;     // line for the weight in flight
  logic                    g_tv;     // token read data valid
  logic [LW-1:0]           g_tt;     // token in flight
  logic                    g_ps_first;

  // next token of the set still to stream
  always_comb begin
    g_tok = '0;
    g_any = 1'b0;
    for (int t = L - 1; t >= 0; t--)
      if (g_rem[t]) begin
        g_tok = LW'(t);
        g_any = 1'b1;
      end
  end

  assign gen_busy = (gs != G_IDLE);
  assign job_take = (gs == G_IDLE) && job_full;

  always_comb begin
    wgt_re_b = (gs == G_LDW) && (g_cnt < 5'(NL));
    wgt_ra_b = WAW'((32'(g_mat) * DH + 32'(g_ct) * NL + 32'(g_cnt)) * KB + 32'(g_kb));
    tok_re_b = (gs == G_STREAM) && g_any;
    tok_ra_b = TAW'(32'(g_tok) * KB + 32'(g_kb));
    for (int i = 0; i < NPE; i++) begin
      pa_w_in[i]     = byte_of(wgt_rd_b, i);
      pa_x_src[0][i] = byte_of(tok_rd_b, i);
    end
    pa_tag_src[0] = 16'(g_tt);
    pa_w_load  = g_wv ? (NL'(1) << g_wl) : '0;
    pa_x_valid = g_tv ? '1 : '0;
  end

  // Accumulation in the temp buffer: the old sum is read when the token enters
  // the PE array and returns together with the Psum one cycle later.
  logic [MAW-1:0] acc_addr_in, acc_addr_out;
  always_comb begin
    acc_addr_in = MAW'((32'(g_mat) * L + 32'(g_tt)) * CT + 32'(g_ct));
    tmp_re_a    = g_tv && !g_ps_first;
    tmp_ra_a    = acc_addr_in;
    tmp_we      = pa_psum_valid[0];
    tmp_wa      = acc_addr_out;
    for (int l = 0; l < NL; l++)
      tmp_wd[l*32 +: 32] = (g_ps_first ? 32'sd0 : tmp_rd_a[l*32 +: 32]) + pa_psum[l];
    for (int l = NL * 32; l < BW; l++) tmp_wd[l] = 1'b0;
  end

  logic [31:0] n_q, n_kv;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gs           <= G_IDLE;
      g_mat        <= '0;
      g_ct         <= '0;
      g_kb         <= '0;
      g_cnt        <= '0;
      g_qset       <= '0;
      g_kvset      <= '0;
      g_rem        <= '0;
      g_wv         <= 1'b0;
      g_wl         <= '0;
      g_tv         <= 1'b0;
      g_tt         <= '0;
      g_ps_first   <= 1'b0;
      acc_addr_out <= '0;
      n_q          <= '0;
      n_kv         <= '0;
    end else begin
      g_wv         <= wgt_re_b;
      g_wl         <= NTW'(g_cnt);
      g_tv         <= tok_re_b;
      g_tt         <= g_tok;
      acc_addr_out <= acc_addr_in;
      if (start && gs == G_IDLE) begin
        n_q  <= '0;
        n_kv <= '0;
      end
      unique case (gs)
        G_IDLE: if (job_full) begin
          for (int t = 0; t < L; t++) begin
            g_qset[t] <= (t >= 32'(job_base) && t < 32'(job_base) + 32'(job_nrows))
                         ? job_crit[(t - 32'(job_base)) % W] : 1'b0;
          end
          g_kvset <= job_kv;
          n_q     <= n_q + 32'($countones(job_crit));
          n_kv    <= n_kv + 32'($countones(job_kv));
          g_mat   <= 2'(MAT_Q);
          g_ct    <= '0;
          g_kb    <= '0;
          gs      <= G_SETUP;
        end
        G_SETUP: begin
          g_rem <= (g_mat == 2'(MAT_Q)) ? g_qset : g_kvset;
          g_cnt <= '0;
          gs    <= (((g_mat == 2'(MAT_Q)) ? g_qset : g_kvset) == '0) ? G_NEXT : G_LDW;
        end
        G_LDW: begin
          if (g_cnt == 5'(NL)) begin
            g_cnt      <= '0;
            g_ps_first <= (g_kb == '0);
            gs         <= G_STREAM;
          end else begin
            g_cnt <= g_cnt + 1'b1;
          end
        end
        G_STREAM: begin
          if (g_any) g_rem[g_tok] <= 1'b0;
          else begin
            g_cnt <= '0;
            gs    <= G_DRAIN;
          end
        end
        G_DRAIN: begin
          // wait for the last Psum to be written
          if (g_cnt == 5'd2) begin
            g_cnt <= '0;
            if (g_kb == $clog2(KB)'(KB - 1)) begin
              g_kb <= '0;
              if (g_ct == ($clog2(CT+1))'(CT - 1)) begin
                g_ct <= '0;
                gs   <= G_NEXT;
              end else begin
                g_ct <= g_ct + 1'b1;
                gs   <= G_SETUP;
              end
            end else begin
              g_kb <= g_kb + 1'b1;
              gs   <= G_SETUP;
            end
          end else begin
            g_cnt <= g_cnt + 1'b1;
          end
        end
        G_NEXT: begin
          g_ct <= '0;
          g_kb <= '0;
          if (g_mat == 2'(MAT_V)) begin
            gs <= G_IDLE;
          end else begin
            g_mat <= g_mat + 1'b1;
            gs    <= G_SETUP;
          end
        end
        default: gs <= G_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------- statistics
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_cycles  <= '0;
      stat_overlap <= '0;
    end else if (start && ps == P_IDLE) begin
      stat_cycles  <= '0;
      stat_overlap <= '0;
    end else if (busy) begin
      stat_cycles  <= stat_cycles + 1'b1;
      if (gen_busy && ps != P_FINISH && ps != P_HAND) stat_overlap <= stat_overlap + 1'b1;
    end
  end
  assign stat_q_rows  = n_q;
  assign stat_kv_rows = n_kv;

  // --------------------------------------------------------------------- MFI
  logic                    mf_run, mf_in_valid, mf_out_valid, mf_skip;
  logic [LW:0]             mf_t;
  logic [LW-1:0]           mf_t_out;
  logic [IW-1:0]           mf_crit_idx [H];
  logic [IW-1:0]           mf_mfi;
  logic [$clog2(H+1)-1:0]  mf_count;

  always_comb begin
    for (int h = 0; h < H; h++) mf_crit_idx[h] = simmap[h][mf_t[LW-1:0]];
  end
  assign mf_in_valid = mf_run && (mf_t < (LW+1)'(ntok));

  mfi_unit #(.H(H), .W(W)) u_mfi (
    .clk, .rst_n, .in_valid(mf_in_valid), .own_idx(IW'(32'(mf_t) % W)),
    .crit_idx(mf_crit_idx), .f_thr(cfg_ffn_thr), .out_valid(mf_out_valid),
    .mfi(mf_mfi), .count(mf_count), .skip(mf_skip));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mf_run   <= 1'b0;
      mf_t     <= '0;
      mf_t_out <= '0;
      mfi_done <= 1'b0;
      ffn_skip <= '0;
      for (int t = 0; t < L; t++) ffn_src[t] <= LW'(t);
    end else begin
      mfi_done <= 1'b0;
      mf_t_out <= mf_t[LW-1:0];
      if (mfi_start && !mf_run) begin
        mf_run   <= 1'b1;
        mf_t     <= '0;
        ffn_skip <= '0;
      end else if (mf_run) begin
        if (mf_t < (LW+1)'(ntok)) mf_t <= mf_t + 1'b1;
        else begin
          mf_run   <= 1'b0;
          mfi_done <= 1'b1;
        end
      end
      if (mf_out_valid) begin
        ffn_skip[mf_t_out] <= mf_skip;
        ffn_src[mf_t_out]  <= mf_skip ? LW'((32'(mf_t_out) / W) * W + 32'(mf_mfi))
                                      : mf_t_out;
      end
    end
  end

  // ---------------------------------------- dynamic allocation and recovery
  logic [H-1:0]            da_crit [NL];
  logic [NTW-1:0]          rc_src  [NL][H];
  logic                    da_busy, rc_busy;
  logic [NW-1:0]           da_total;

  always_comb begin
    for (int t = 0; t < NL; t++) begin
      for (int h = 0; h < H; h++) begin
        if (32'(da_group) * NL + t < L) begin
          da_crit[t][h] = critmap[h][32'(da_group) * NL + t];
          rc_src[t][h]  = NTW'((t / W) * W + 32'(simmap[h][32'(da_group) * NL + t]));
        end else begin
          da_crit[t][h] = 1'b0;
          rc_src[t][h]  = NTW'(t);
        end
      end
    end
  end

  dyn_alloc #(.NT(NL), .NL(NL), .H(H)) u_dyn_alloc (
    .clk, .rst_n, .start(da_start), .crit(da_crit), .busy(da_busy), .done(da_done),
    .total(da_total), .makespan(da_makespan), .naive_makespan(da_naive_makespan),
    .load(da_load), .sched_tok(da_sched_tok), .sched_head(da_sched_head));

  psum_recover #(.NT(NL), .H(H), .PSUM_W(32), .OUT_W(36)) u_recover (
    .clk, .rst_n, .wr_valid(rc_wr_valid), .wr_tok(rc_wr_tok), .wr_head(rc_wr_head),
    .wr_psum(rc_wr_psum), .src(rc_src), .start(rc_start), .busy(rc_busy),
    .done(rc_done), .out(rc_out));

endmodule
