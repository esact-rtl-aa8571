// tb_psum_recover: writes random Psums for the critical blocks of a random
// similarity map, runs the recovery, and compares each token's output with the
// reference sum over heads of the Psum of the row it maps to in that head.
module tb_psum_recover;
  localparam int NT = 16, H = 12;
  logic clk = 0, rst_n = 0, wr_valid = 0, start = 0, busy, done;
  logic [3:0] wr_tok, wr_head;
  logic signed [31:0] wr_psum;
  logic [3:0] src [NT][H];
  logic signed [35:0] out [NT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  psum_recover #(.NT(NT), .H(H)) dut (.clk, .rst_n, .wr_valid, .wr_tok, .wr_head, .wr_psum,
    .src, .start, .busy, .done, .out);

  task automatic run();
    int ps [NT][H];
    longint e;
    int cycles;
    // similarity inside windows of 8: a row maps to itself or an earlier row
    // of its window that is itself critical
    for (int h = 0; h < H; h++)
      for (int t = 0; t < NT; t++) begin
        src[t][h] = 4'(t);
        if (t % 8 != 0 && $urandom_range(0, 1)) begin
          int c; c = $urandom_range((t / 8) * 8, t - 1);
          if (src[c][h] == 4'(c)) src[t][h] = 4'(c);
        end
      end
    for (int t = 0; t < NT; t++)
      for (int h = 0; h < H; h++) begin
        ps[t][h] = int'($urandom) >>> 4;
        if (src[t][h] == 4'(t)) begin
          wr_valid = 1; wr_tok = 4'(t); wr_head = 4'(h); wr_psum = ps[t][h];
          @(negedge clk);
        end
      end
    wr_valid = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++; if (cycles != H + 2) begin failures++; $display("FAIL cycles %0d", cycles); end
    for (int t = 0; t < NT; t++) begin
      e = 0;
      for (int h = 0; h < H; h++) e += ps[src[t][h]][h];
      checks++;
      if (out[t] != 36'(e)) begin failures++; $display("FAIL token %0d out %0d expected %0d", t, out[t], e); end
    end
  endtask

  initial begin
    wr_tok = 0; wr_head = 0; wr_psum = 0;
    foreach (src[t, h]) src[t][h] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (5) run();
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
