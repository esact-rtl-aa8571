// tb_bit_level_pred_unit: runs random 8-bit operands through the bit-level
// prediction unit and compares every cell of the tile with an independent
// reference: HLog-quantize each operand by nearest-level search, multiply,
// accumulate. It also checks the 8-bit requantized output and that a tile
// takes exactly one cycle per reduction step.
module tb_bit_level_pred_unit;
  localparam int R = 8, C = 24, K = 64;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic signed [7:0] row_data [R];
  logic signed [7:0] col_data [C];
  logic [4:0] shift;
  logic signed [31:0] acc [R][C];
  logic signed [7:0]  q8  [R][C];
  longint expect_acc [R][C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bit_level_pred_unit #(.R(R), .C(C), .CNT_W(11), .ACC_W(32)) dut (
    .clk, .rst_n, .clear, .in_valid, .row_data, .col_data, .shift, .acc, .q8);

  function automatic int ref_quant(int x);
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

  task automatic run_tile(int steps, int sh);
    int cycles;
    longint s;
    shift = 5'(sh);
    foreach (expect_acc[r, c]) expect_acc[r][c] = 0;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    cycles = 0;
    for (int k = 0; k < steps; k++) begin
      foreach (row_data[r]) row_data[r] = 8'($urandom);
      foreach (col_data[c]) col_data[c] = 8'($urandom);
      foreach (expect_acc[r, c])
        expect_acc[r][c] += ref_quant(row_data[r]) * ref_quant(col_data[c]);
      in_valid = 1;
      @(negedge clk);
      cycles++;
    end
    in_valid = 0;
    checks++;
    if (cycles != steps) failures++;
    foreach (acc[r, c]) begin
      checks++;
      if (acc[r][c] != expect_acc[r][c]) begin
        failures++;
        if (failures < 10) $display("FAIL acc[%0d][%0d]=%0d expected %0d", r, c, acc[r][c], expect_acc[r][c]);
      end
      s = expect_acc[r][c] >>> sh;
      if (s > 127) s = 127;
      if (s < -128) s = -128;
      checks++;
      if (q8[r][c] != s) begin
        failures++;
        if (failures < 10) $display("FAIL q8[%0d][%0d]=%0d expected %0d", r, c, q8[r][c], s);
      end
    end
  endtask

  initial begin
    foreach (row_data[r]) row_data[r] = 0;
    foreach (col_data[c]) col_data[c] = 0;
    shift = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_tile(K, 8);
    run_tile(5, 0);
    run_tile(K, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
