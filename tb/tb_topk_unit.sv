// tb_topk_unit: random rows (with many ties, values from a small range) are
// pruned to their top k; the kept set is compared with a reference that sorts
// by value then by index, and the run must take exactly k cycles plus one.
module tb_topk_unit;
  localparam int L = 128, K_MAX = 26;
  logic clk = 0, rst_n = 0, start = 0;
  logic [4:0] k;
  logic signed [7:0] row [L];
  logic busy, done;
  logic [L-1:0] mask;
  logic signed [7:0] spa [L];
  logic [6:0] idx [K_MAX];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  topk_unit #(.L(L), .K_MAX(K_MAX)) dut (.clk, .rst_n, .start, .k, .row, .busy, .done, .mask, .spa, .idx);

  task automatic run(int kk, int range_v);
    bit sel [L];
    int cycles, bi;
    foreach (row[i]) row[i] = 8'($urandom_range(0, 2 * range_v) - range_v);
    foreach (sel[i]) sel[i] = 0;
    // reference: repeated argmax, lowest index on ties
    for (int j = 0; j < kk; j++) begin
      bi = -1;
      for (int i = 0; i < L; i++) if (!sel[i] && (bi < 0 || row[i] > row[bi])) bi = i;
      sel[bi] = 1;
    end
    k = 5'(kk);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != kk + 1) begin failures++; $display("FAIL latency %0d for k=%0d", cycles, kk); end
    for (int i = 0; i < L; i++) begin
      checks++;
      if (mask[i] != sel[i] || spa[i] != (sel[i] ? row[i] : 8'sd0)) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d pos %0d mask %0d expected %0d", kk, i, mask[i], sel[i]);
      end
    end
    for (int j = 0; j < kk; j++) begin
      checks++;
      if (!sel[idx[j]]) failures++;
      if (j > 0) begin
        checks++;
        if (row[idx[j]] > row[idx[j-1]]) failures++;
      end
    end
  endtask

  initial begin
    foreach (row[i]) row[i] = 0;
    k = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1, 100);
    run(26, 127);
    run(13, 5);
    run(20, 2);
    for (int t = 0; t < 6; t++) run($urandom_range(1, 26), $urandom_range(1, 127));
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
