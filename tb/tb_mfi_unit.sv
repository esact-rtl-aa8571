// tb_mfi_unit: the paper's Fig. 10 style cases plus random head index sets;
// MFI, count and the skip decision are compared with a reference count.
module tb_mfi_unit;
  localparam int H = 12, W = 8;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [2:0] own_idx;
  logic [2:0] crit_idx [H];
  logic [3:0] f_thr, count;
  logic out_valid, skip;
  logic [2:0] mfi;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  mfi_unit #(.H(H), .W(W)) dut (.clk, .rst_n, .in_valid, .own_idx, .crit_idx, .f_thr,
                                .out_valid, .mfi, .count, .skip);

  task automatic run(int own, int f);
    int cnt [W]; int b, bn;
    foreach (cnt[v]) cnt[v] = 0;
    foreach (crit_idx[h]) cnt[crit_idx[h]]++;
    b = own; bn = cnt[own];
    for (int v = 0; v < W; v++) if (cnt[v] > bn) begin b = v; bn = cnt[v]; end
    own_idx = 3'(own); f_thr = 4'(f);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || mfi != 3'(b) || count != 4'(bn) || skip != (b != own && bn > f)) begin
      failures++;
      $display("FAIL own %0d: mfi %0d/%0d count %0d/%0d skip %0d", own, mfi, b, count, bn, skip);
    end
  endtask

  initial begin
    foreach (crit_idx[h]) crit_idx[h] = 0;
    own_idx = 0; f_thr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // token 1 of a window: 10 of 12 heads say "critical vector 0"
    foreach (crit_idx[h]) crit_idx[h] = (h < 10) ? 3'd0 : 3'd1;
    run(1, 8);
    checks++; if (!skip) failures++;
    run(1, 10);          // count not greater than f: keep
    checks++; if (skip) failures++;
    run(0, 2);           // MFI is itself: keep
    checks++; if (skip) failures++;
    for (int t = 0; t < 300; t++) begin
      foreach (crit_idx[h]) crit_idx[h] = 3'($urandom_range(0, ($urandom_range(0, 1) ? 1 : 7)));
      run($urandom_range(0, 7), $urandom_range(0, 12));
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
