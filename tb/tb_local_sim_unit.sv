// tb_local_sim_unit: builds random windows of SPA rows in which some rows are
// near copies of earlier rows, runs the unit and compares the critical flags
// and the similar-to map with a reference that computes the full dense L1
// distance between rows and applies the same in-order greedy rule. It also
// checks the empty-column mask, the progressive K/V selection across two
// windows of one head, a short last window, and the cycle bound 2*nrows+1.
module tb_local_sim_unit;
  localparam int W = 8, L = 128, K_MAX = 26;
  logic clk = 0, rst_n = 0, head_start = 0, start = 0;
  logic [3:0] nrows;
  logic [4:0] k;
  logic [15:0] thr;
  logic signed [7:0] spa [W][L];
  logic [L-1:0] mask [W];
  logic [6:0] idx [W][K_MAX];
  logic busy, done;
  logic [W-1:0] crit;
  logic [2:0] sim_to [W];
  logic [L-1:0] col_active, kv_new;
  logic [L-1:0] done_cols;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  local_sim_unit #(.W(W), .L(L), .K_MAX(K_MAX), .DW(16)) dut (
    .clk, .rst_n, .head_start, .start, .nrows, .k, .thr, .spa, .mask, .idx,
    .busy, .done, .crit, .sim_to, .col_active, .kv_new);

  // Random row with exactly kk kept positions; a row may copy an earlier one
  // with a few values perturbed.
  task automatic make_window(int kk, int nr);
    int p, src;
    for (int r = 0; r < W; r++) begin
      mask[r] = '0;
      for (int i = 0; i < L; i++) spa[r][i] = 0;
      for (int j = 0; j < K_MAX; j++) idx[r][j] = 0;
      if (r > 0 && $urandom_range(0, 2) != 0) begin
        src = $urandom_range(0, r - 1);
        mask[r] = mask[src];
        for (int j = 0; j < kk; j++) begin
          idx[r][j] = idx[src][j];
          spa[r][idx[r][j]] = spa[src][idx[r][j]] + 8'($urandom_range(0, 6) - 3);
        end
        if ($urandom_range(0, 1)) begin   // move one kept position
          p = $urandom_range(0, L - 1);
          if (!mask[r][p]) begin
            mask[r][idx[r][0]] = 0; spa[r][idx[r][0]] = 0;
            idx[r][0] = 7'(p); mask[r][p] = 1; spa[r][p] = 8'($urandom_range(1, 60));
          end
        end
      end else begin
        for (int j = 0; j < kk; j++) begin
          do p = $urandom_range(0, L - 1); while (mask[r][p]);
          mask[r][p] = 1; idx[r][j] = 7'(p);
          spa[r][p] = 8'($urandom_range(0, 120) - 20);
        end
      end
    end
  endtask

  task automatic check_window(int kk, int nr, int th);
    bit rc [W]; int rs [W]; bit cl [W];
    int d, cycles;
    logic [L-1:0] act;
    for (int r = 0; r < W; r++) begin rc[r] = 0; rs[r] = r; cl[r] = 0; end
    for (int c = 0; c < nr; c++) begin
      if (cl[c]) continue;
      rc[c] = 1; cl[c] = 1;
      for (int r = c + 1; r < nr; r++) begin
        if (cl[r]) continue;
        d = 0;
        for (int i = 0; i < L; i++) d += (spa[r][i] > spa[c][i]) ? spa[r][i] - spa[c][i] : spa[c][i] - spa[r][i];
        if (d <= th) begin cl[r] = 1; rs[r] = c; end
      end
    end
    act = '0;
    for (int r = 0; r < nr; r++) act |= mask[r];
    k = 5'(kk); nrows = 4'(nr); thr = 16'(th);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles > 2 * nr + 2) begin failures++; $display("FAIL cycles %0d", cycles); end
    for (int r = 0; r < nr; r++) begin
      checks++;
      if (crit[r] != rc[r] || sim_to[r] != 3'(rs[r])) begin
        failures++;
        $display("FAIL row %0d crit %0d/%0d sim_to %0d/%0d", r, crit[r], rc[r], sim_to[r], rs[r]);
      end
    end
    checks++;
    if (col_active != act) begin failures++; $display("FAIL col_active"); end
    checks++;
    if (kv_new != (act & ~done_cols)) begin failures++; $display("FAIL kv_new"); end
    done_cols |= act;
  endtask

  initial begin
    for (int r = 0; r < W; r++) begin mask[r] = '0; for (int i = 0; i < L; i++) spa[r][i] = 0;
      for (int j = 0; j < K_MAX; j++) idx[r][j] = 0; end
    k = 1; nrows = 1; thr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int hd = 0; hd < 3; hd++) begin
      @(negedge clk); head_start = 1;
      @(negedge clk); head_start = 0;
      done_cols = '0;
      for (int w = 0; w < 4; w++) begin
        make_window(hd == 0 ? 26 : $urandom_range(4, 26), 8);
        check_window(hd == 0 ? 26 : int'(k), (w == 3) ? 5 : 8, $urandom_range(10, 120));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
