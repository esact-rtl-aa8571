// tb_pe_line: loads random weights, streams random input vectors and checks
// each Psum against a software dot product, its one-cycle latency, the tag,
// and that weights stay in place until the next load.
module tb_pe_line;
  localparam int NPE = 64;
  logic clk = 0, rst_n = 0, w_load = 0, x_valid = 0;
  logic signed [7:0] w_in [NPE], x_in [NPE], w_ref [NPE];
  logic [15:0] tag_in, tag_out;
  logic psum_valid;
  logic signed [31:0] psum;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  pe_line #(.NPE(NPE)) dut (.clk, .rst_n, .w_load, .w_in, .x_valid, .x_in, .tag_in,
                            .psum_valid, .psum, .tag_out);

  initial begin
    int e;
    foreach (w_in[i]) begin w_in[i] = 0; x_in[i] = 0; end
    tag_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      foreach (w_in[i]) begin w_in[i] = 8'($urandom); w_ref[i] = w_in[i]; end
      if (round == 3) foreach (w_in[i]) begin w_in[i] = -8'sd128; w_ref[i] = w_in[i]; end
      w_load = 1; @(negedge clk); w_load = 0;
      foreach (w_in[i]) w_in[i] = 8'($urandom);   // must not be taken
      for (int t = 0; t < 20; t++) begin
        foreach (x_in[i]) x_in[i] = (round == 3) ? -8'sd128 : 8'($urandom);
        e = 0;
        foreach (x_in[i]) e += x_in[i] * w_ref[i];
        tag_in = 16'(t + 100 * round);
        x_valid = 1;
        @(negedge clk);
        x_valid = 0;
        checks++;
        if (!psum_valid || psum != e || tag_out != tag_in) begin
          failures++; $display("FAIL psum %0d expected %0d", psum, e);
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
