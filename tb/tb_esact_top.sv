// tb_esact_top: end-to-end test of the accelerator at reduced size.
//
// Tokens are random, with some tokens of each window made near copies of an
// earlier token so that similarity occurs. For every head the test loads the
// head's weight slices, runs the head, and compares with a reference model
// written independently of the RTL:
//   HLog prediction of K, Q and attention (nearest-level quantization, exact
//   integer sums, shift and saturate), row-wise top-k, greedy in-window
//   similarity with the dense L1 distance, active and new K/V columns per
//   window, and exact Q/K/V = X * W for the rows that must be generated.
// Then the MFI FFN mask, the dynamic allocation schedule and the recovery of
// the concatenated output of each group are checked.
// Mechanisms counted (each must occur at least once): top-k pruning, similar
// (skipped) Q rows, empty K/V columns, K/V rows generated in a later window
// (progressive generation), overlap of prediction with generation, a short last
// window, MFI FFN skips, dynamic allocation shortening the critical path, and
// recovered similar-row Psums.
module tb_esact_top;
  import esact_pkg::*;

  localparam int L = 32, D = 128, DH = 64, H = 2, W = 8, K_MAX = 6, NL = 16, BC = 64;
  localparam int TOK_DEPTH = 64, WGT_DEPTH = 384, TMP_DEPTH = 384;
  localparam int NH_RUN = H, REQUIRE_XHEAD = 1;
  localparam int NTOK = 30, TOPK = 5, SIM_THR = 60, QK_SHIFT = 7, ATT_SHIFT = 9, FFN_THR = 1;
  localparam int WATCHDOG = 2000000;
  localparam int KB = D / 64, CT = DH / NL, NG = (L + NL - 1) / NL;
  localparam int LW = $clog2(L), HW = (H > 1) ? $clog2(H) : 1;
  localparam int NW = $clog2(NL * H + 1), SLOTS = H + H;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tok_we = 0, wgt_we = 0, tmp_re = 0;
  logic [$clog2(TOK_DEPTH)-1:0] tok_waddr = '0;
  logic [$clog2(WGT_DEPTH)-1:0] wgt_waddr = '0;
  logic [$clog2(TMP_DEPTH)-1:0] tmp_raddr = '0;
  logic [511:0] tok_wdata = '0, wgt_wdata = '0, tmp_rdata;
  logic [HW-1:0] cfg_head = '0;
  logic [LW:0] cfg_ntok = (LW+1)'(NTOK);
  logic [$clog2(K_MAX+1)-1:0] cfg_k = TOPK;
  logic [15:0] cfg_sim_thr = SIM_THR;
  logic [4:0] cfg_qk_shift = QK_SHIFT, cfg_att_shift = ATT_SHIFT;
  logic [$clog2(H+1)-1:0] cfg_ffn_thr = FFN_THR;
  logic start = 0, busy, done;
  logic win_valid;
  logic [LW-1:0] win_base;
  logic [W-1:0] win_crit;
  logic [2:0] win_sim_to [W];
  logic [L-1:0] win_kv_new;
  logic [31:0] stat_cycles, stat_overlap, stat_q_rows, stat_kv_rows;
  logic mfi_start = 0, mfi_done;
  logic [L-1:0] ffn_skip;
  logic [LW-1:0] ffn_src [L];
  logic da_start = 0, da_done;
  logic [$clog2(NG) > 0 ? $clog2(NG) - 1 : 0 : 0] da_group = '0;
  logic [NW-1:0] da_makespan, da_naive_makespan;
  logic [NW-1:0] da_load [NL];
  logic [3:0] da_sched_tok [NL][SLOTS];
  logic [HW-1:0] da_sched_head [NL][SLOTS];
  logic rc_wr_valid = 0, rc_start = 0, rc_done;
  logic [3:0] rc_wr_tok = '0;
  logic [HW-1:0] rc_wr_head = '0;
  logic signed [31:0] rc_wr_psum = '0;
  logic signed [35:0] rc_out [NL];

  esact_top #(.L(L), .D(D), .DH(DH), .H(H), .W(W), .K_MAX(K_MAX), .NL(NL), .BC(BC),
              .TOK_DEPTH(TOK_DEPTH), .WGT_DEPTH(WGT_DEPTH), .TMP_DEPTH(TMP_DEPTH)) dut (.*);

  // ------------------------------------------------------------ reference
  int checks = 0, failures = 0;
  int X [L][D];
  int Wm [3][D][DH];                 // current head's Q, K, V slices
  int hX [L][D];                     // HLog values of the operands
  int hW [3][D][DH];
  int kpr [L][DH];
  int qpr [W][DH];
  int att [W][L];
  int spa [W][L];
  bit msk [W][L];
  int ref_sim [H][L];
  bit ref_crit [H][L];
  bit gen_q [L], gen_kv [L], done_cols [L];
  int n_q_exp, n_kv_exp;
  // mechanism counters
  int m_topk = 0, m_similar = 0, m_empty_col = 0, m_progressive = 0, m_overlap = 0,
      m_short_win = 0, m_ffn_skip = 0, m_dyn_alloc = 0, m_recovered = 0;

  function automatic int hq(int x);
    int m, best, bestd, d;
    int levels[14] = '{1, 2, 3, 4, 6, 8, 12, 16, 24, 32, 48, 64, 96, 128};
    m = (x < 0) ? (-x - 1) : x;
    best = 1; bestd = 1 << 30;
    foreach (levels[i]) begin
      d = (m > levels[i]) ? m - levels[i] : levels[i] - m;
      if (d <= bestd) begin bestd = d; best = levels[i]; end
    end
    return (x < 0) ? -best : best;
  endfunction

  function automatic int sat8(longint v, int sh);
    longint s;
    s = v >>> sh;
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  task automatic make_tokens();
    int src;
    for (int t = 0; t < L; t++) begin
      if (t % W != 0 && $urandom_range(0, 99) < 45) begin
        src = $urandom_range((t / W) * W, t - 1);
        for (int k = 0; k < D; k++) X[t][k] = X[src][k] + (($urandom_range(0, 9) == 0) ? 1 : 0);
      end else begin
        for (int k = 0; k < D; k++) X[t][k] = $urandom_range(0, 60) - 30;
      end
      for (int k = 0; k < D; k++) begin
        if (X[t][k] > 127) X[t][k] = 127;
        if (X[t][k] < -128) X[t][k] = -128;
      end
    end
  endtask

  task automatic write_tokens();
    for (int t = 0; t < L; t++)
      for (int kb = 0; kb < KB; kb++) begin
        @(negedge clk);
        tok_we = 1;
        tok_waddr = $bits(tok_waddr)'(t * KB + kb);
        for (int i = 0; i < 64; i++) tok_wdata[i*8 +: 8] = 8'(X[t][kb*64 + i]);
      end
    @(negedge clk); tok_we = 0;
    foreach (X[t, k]) hX[t][k] = hq(X[t][k]);
  endtask

  task automatic make_weights();
    for (int m = 0; m < 3; m++)
      for (int k = 0; k < D; k++)
        for (int n = 0; n < DH; n++) Wm[m][k][n] = $urandom_range(0, 50) - 25;
    for (int m = 0; m < 3; m++)
      for (int n = 0; n < DH; n++)
        for (int kb = 0; kb < KB; kb++) begin
          @(negedge clk);
          wgt_we = 1;
          wgt_waddr = $bits(wgt_waddr)'((m * DH + n) * KB + kb);
          for (int i = 0; i < 64; i++) wgt_wdata[i*8 +: 8] = 8'(Wm[m][kb*64 + i][n]);
        end
    @(negedge clk); wgt_we = 0;
    foreach (Wm[m, k, n]) hW[m][k][n] = hq(Wm[m][k][n]);
  endtask

  // Reference prediction of one window; returns expected crit/sim and kv_new.
  task automatic ref_window(int w, int hd, output bit crit_o [W], output int sim_o [W],
                            output bit kvn_o [L]);
    longint s;
    int nr, bi, d;
    bit cl [W];
    bit act [L];
    nr = (w * W + W <= NTOK) ? W : NTOK - w * W;
    for (int r = 0; r < W; r++)
      for (int n = 0; n < DH; n++) begin
        s = 0;
        for (int k = 0; k < D; k++)
          s += (w * W + r < NTOK) ? hX[w*W + r][k] * hW[0][k][n] : hq(0) * hW[0][k][n];
        qpr[r][n] = sat8(s, QK_SHIFT);
      end
    for (int r = 0; r < W; r++)
      for (int j = 0; j < L; j++) begin
        s = 0;
        for (int dd = 0; dd < DH; dd++) s += hq(qpr[r][dd]) * hq(kpr[j][dd]);
        att[r][j] = (j < NTOK) ? sat8(s, ATT_SHIFT) : -128;
      end
    for (int r = 0; r < W; r++) begin
      for (int j = 0; j < L; j++) begin msk[r][j] = 0; spa[r][j] = 0; end
      if (r >= nr) continue;
      for (int q = 0; q < TOPK; q++) begin
        bi = -1;
        for (int j = 0; j < L; j++) if (!msk[r][j] && (bi < 0 || att[r][j] > att[r][bi])) bi = j;
        msk[r][bi] = 1; spa[r][bi] = att[r][bi];
      end
    end
    for (int r = 0; r < W; r++) begin crit_o[r] = 0; sim_o[r] = r; cl[r] = 0; end
    for (int c = 0; c < nr; c++) begin
      if (cl[c]) continue;
      crit_o[c] = 1; cl[c] = 1;
      for (int r = c + 1; r < nr; r++) begin
        if (cl[r]) continue;
        d = 0;
        for (int j = 0; j < L; j++) d += (spa[r][j] > spa[c][j]) ? spa[r][j] - spa[c][j] : spa[c][j] - spa[r][j];
        if (d <= SIM_THR) begin cl[r] = 1; sim_o[r] = c; end
      end
    end
    for (int j = 0; j < L; j++) begin
      act[j] = 0;
      for (int r = 0; r < nr; r++) act[j] |= msk[r][j];
      kvn_o[j] = act[j] && !done_cols[j];
      if (act[j] && done_cols[j]) ;
      if (kvn_o[j] && w > 0) m_progressive++;
      if (j < NTOK && !act[j]) m_empty_col++;
      done_cols[j] |= act[j];
    end
    if (nr < W) m_short_win++;
    for (int r = 0; r < nr; r++) begin
      ref_sim[hd][w*W + r] = sim_o[r];
      ref_crit[hd][w*W + r] = crit_o[r];
      if (!crit_o[r]) m_similar++;
      if (crit_o[r]) gen_q[w*W + r] = 1;
    end
    for (int j = 0; j < L; j++) if (kvn_o[j]) gen_kv[j] = 1;
    if (TOPK < NTOK) m_topk++;
  endtask

  task automatic run_head(int hd);
    longint s;
    int nwin, wi;
    bit crit_e [W];
    int sim_e [W];
    bit kvn_e [L];
    logic [511:0] word;
    make_weights();
    for (int t = 0; t < L; t++) begin gen_q[t] = 0; gen_kv[t] = 0; done_cols[t] = 0; end
    for (int t = 0; t < L; t++)
      for (int n = 0; n < DH; n++) begin
        s = 0;
        for (int k = 0; k < D; k++)
          s += ((t < NTOK) ? hX[t][k] : hq(0)) * hW[1][k][n];
        kpr[t][n] = sat8(s, QK_SHIFT);
      end
    nwin = (NTOK + W - 1) / W;
    cfg_head = HW'(hd);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wi = 0;
    while (!done) begin
      @(negedge clk);
      if (win_valid) begin
        ref_window(wi, hd, crit_e, sim_e, kvn_e);
        checks++;
        if (win_base != LW'(wi * W)) begin failures++; $display("FAIL head %0d window base %0d", hd, win_base); end
        for (int r = 0; r < W; r++) begin
          if (wi * W + r >= NTOK) continue;
          checks++;
          if (win_crit[r] != crit_e[r] || int'(win_sim_to[r]) != sim_e[r]) begin
            failures++;
            $display("FAIL head %0d window %0d row %0d crit %0d/%0d sim %0d/%0d", hd, wi, r,
                     win_crit[r], crit_e[r], win_sim_to[r], sim_e[r]);
          end
        end
        for (int j = 0; j < L; j++) begin
          checks++;
          if (win_kv_new[j] != kvn_e[j]) begin
            failures++;
            if (failures < 20) $display("FAIL head %0d window %0d kv_new[%0d] %0d/%0d", hd, wi, j, win_kv_new[j], kvn_e[j]);
          end
        end
        wi++;
      end
    end
    checks++;
    if (wi != nwin) begin failures++; $display("FAIL %0d windows seen", wi); end
    if (stat_overlap > 0) m_overlap++;
    n_q_exp = 0; n_kv_exp = 0;
    for (int t = 0; t < L; t++) begin n_q_exp += gen_q[t]; n_kv_exp += gen_kv[t]; end
    checks++;
    if (stat_q_rows != 32'(n_q_exp) || stat_kv_rows != 32'(n_kv_exp)) begin
      failures++; $display("FAIL rows generated q %0d/%0d kv %0d/%0d", stat_q_rows, n_q_exp, stat_kv_rows, n_kv_exp);
    end
    $display("head %0d: %0d cycles, %0d overlapped, Q rows %0d of %0d, K/V rows %0d of %0d",
             hd, stat_cycles, stat_overlap, stat_q_rows, NTOK, stat_kv_rows, NTOK);
    // formal Q/K/V of every generated row
    for (int m = 0; m < 3; m++)
      for (int t = 0; t < L; t++) begin
        if (!((m == 0) ? gen_q[t] : gen_kv[t])) continue;
        for (int ct = 0; ct < CT; ct++) begin
          @(negedge clk); tmp_re = 1; tmp_raddr = $bits(tmp_raddr)'((m * L + t) * CT + ct);
          @(negedge clk); tmp_re = 0; word = tmp_rdata;
          for (int j = 0; j < NL; j++) begin
            s = 0;
            for (int k = 0; k < D; k++) s += X[t][k] * Wm[m][k][ct * NL + j];
            checks++;
            if ($signed(word[j*32 +: 32]) != 32'(s)) begin
              failures++;
              if (failures < 20) $display("FAIL head %0d mat %0d token %0d col %0d: %0d expected %0d",
                                          hd, m, t, ct * NL + j, $signed(word[j*32 +: 32]), s);
            end
          end
        end
      end
  endtask

  task automatic check_mfi();
    int cnt [W]; int own, b, bn, src_e; bit sk;
    @(negedge clk); mfi_start = 1;
    @(negedge clk); mfi_start = 0;
    while (!mfi_done) @(negedge clk);
    @(negedge clk);
    for (int t = 0; t < NTOK; t++) begin
      foreach (cnt[v]) cnt[v] = 0;
      for (int hd = 0; hd < H; hd++) cnt[ref_sim[hd][t]]++;
      own = t % W; b = own; bn = cnt[own];
      for (int v = 0; v < W; v++) if (cnt[v] > bn) begin b = v; bn = cnt[v]; end
      sk = (b != own) && (bn > FFN_THR);
      src_e = sk ? (t / W) * W + b : t;
      if (sk) m_ffn_skip++;
      checks++;
      if (ffn_skip[t] != sk || int'(ffn_src[t]) != src_e) begin
        failures++; $display("FAIL MFI token %0d skip %0d/%0d src %0d/%0d", t, ffn_skip[t], sk, ffn_src[t], src_e);
      end
    end
  endtask

  task automatic check_groups();
    int tot, nv, c, ms, tok;
    int seen [NL][H];
    int ps [NL][H];
    longint e;
    for (int g = 0; g < NG; g++) begin
      da_group = $bits(da_group)'(g);
      tot = 0; nv = 0;
      for (int t = 0; t < NL; t++) begin
        c = 0;
        tok = g * NL + t;
        for (int hd = 0; hd < H; hd++) if (tok < L && ref_crit[hd][tok]) c++;
        tot += c; if (c > nv) nv = c;
      end
      ms = (tot + NL - 1) / NL;
      @(negedge clk); da_start = 1;
      @(negedge clk); da_start = 0;
      while (!da_done) @(negedge clk);
      @(negedge clk);
      checks++;
      if (da_makespan != NW'(ms) || da_naive_makespan != NW'(nv)) begin
        failures++; $display("FAIL group %0d makespan %0d/%0d naive %0d/%0d", g, da_makespan, ms, da_naive_makespan, nv);
      end
      if (ms < nv) m_dyn_alloc++;
      foreach (seen[t, hd]) seen[t][hd] = 0;
      for (int l = 0; l < NL; l++) for (int s = 0; s < int'(da_load[l]); s++) seen[da_sched_tok[l][s]][da_sched_head[l][s]]++;
      for (int t = 0; t < NL; t++)
        for (int hd = 0; hd < H; hd++) begin
          tok = g * NL + t;
          checks++;
          if (seen[t][hd] != ((tok < L && ref_crit[hd][tok]) ? 1 : 0)) begin
            failures++; $display("FAIL group %0d block %0d,%0d scheduled %0d times", g, t, hd, seen[t][hd]);
          end
        end
      // Psums of the critical blocks, in schedule order
      for (int l = 0; l < NL; l++)
        for (int s = 0; s < int'(da_load[l]); s++) begin
          int t, hd;
          t = da_sched_tok[l][s]; hd = da_sched_head[l][s];
          ps[t][hd] = int'($urandom) >>> 8;
          @(negedge clk);
          rc_wr_valid = 1; rc_wr_tok = 4'(t); rc_wr_head = HW'(hd); rc_wr_psum = ps[t][hd];
        end
      @(negedge clk); rc_wr_valid = 0; rc_start = 1;
      @(negedge clk); rc_start = 0;
      while (!rc_done) @(negedge clk);
      for (int t = 0; t < NL; t++) begin
        tok = g * NL + t;
        if (tok >= NTOK) continue;
        e = 0;
        for (int hd = 0; hd < H; hd++) begin
          e += ps[(t / W) * W + ref_sim[hd][tok]][hd];
          if (!ref_crit[hd][tok]) m_recovered++;
        end
        checks++;
        if (rc_out[t] != 36'(e)) begin failures++; $display("FAIL group %0d token %0d out %0d expected %0d", g, t, rc_out[t], e); end
      end
    end
  endtask

  task automatic need(string name, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
    else $display("mechanism %-28s %0d", name, n);
  endtask

  initial begin
    foreach (ref_sim[hd, t]) begin ref_sim[hd][t] = t % W; ref_crit[hd][t] = 1; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    make_tokens();
    write_tokens();
    for (int hd = 0; hd < NH_RUN; hd++) run_head(hd);
    check_mfi();
    check_groups();
    need("top-k pruning", m_topk);
    need("similar Q rows skipped", m_similar);
    need("empty K/V columns skipped", m_empty_col);
    need("progressive K/V rows", m_progressive);
    need("prediction/generation overlap", m_overlap);
    need("short last window", m_short_win);
    if (REQUIRE_XHEAD) need("MFI FFN skip", m_ffn_skip);
    if (REQUIRE_XHEAD) need("dynamic allocation gain", m_dyn_alloc);
    need("recovered similar Psums", m_recovered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
