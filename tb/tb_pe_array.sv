// tb_pe_array: loads a different weight vector into each line through the
// column crossbar, routes random sources to lines through the row crossbar,
// and checks every line's Psum and tag one cycle later.
module tb_pe_array;
  localparam int NL = 16, NPE = 64, NSRC = 16;
  logic clk = 0, rst_n = 0;
  logic [NL-1:0] w_load, x_valid, psum_valid;
  logic signed [7:0] w_in [NPE];
  logic signed [7:0] x_src [NSRC][NPE];
  logic [15:0] tag_src [NSRC], tag_out [NL];
  logic [3:0] x_sel [NL];
  logic signed [31:0] psum [NL];
  logic signed [7:0] wr [NL][NPE];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  pe_array #(.NL(NL), .NPE(NPE), .NSRC(NSRC)) dut (.clk, .rst_n, .w_load, .w_in, .x_src,
    .tag_src, .x_sel, .x_valid, .psum_valid, .psum, .tag_out);

  initial begin
    int e;
    w_load = 0; x_valid = 0;
    foreach (w_in[i]) w_in[i] = 0;
    foreach (x_src[s, i]) x_src[s][i] = 0;
    foreach (tag_src[s]) tag_src[s] = 16'(s);
    foreach (x_sel[l]) x_sel[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      foreach (w_in[i]) begin w_in[i] = 8'($urandom); wr[l][i] = w_in[i]; end
      w_load = NL'(1) << l;
      @(negedge clk);
    end
    w_load = 0;
    for (int c = 0; c < 30; c++) begin
      foreach (x_src[s, i]) x_src[s][i] = 8'($urandom);
      foreach (x_sel[l]) x_sel[l] = 4'($urandom);
      x_valid = NL'($urandom);
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        checks++;
        if (psum_valid[l] != x_valid[l]) failures++;
        if (x_valid[l]) begin
          e = 0;
          for (int i = 0; i < NPE; i++) e += x_src[x_sel[l]][i] * wr[l][i];
          checks++;
          if (psum[l] != e || tag_out[l] != 16'(x_sel[l])) begin
            failures++; $display("FAIL line %0d psum %0d expected %0d", l, psum[l], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
