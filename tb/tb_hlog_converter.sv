// tb_hlog_converter: feeds random HLog products (both one- and two-term, both
// signs, including the largest exponents) into the converter and compares its
// result with the plain integer sum of the decoded products, for two sums
// separated by a clear, and for a 4-input converter.
module tb_hlog_converter;
  import esact_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  hprod_t [0:0] p1;
  hprod_t [3:0] p4;
  logic signed [31:0] res1, res4;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hlog_converter #(.NIN(1), .CNT_W(11), .OUT_W(32)) dut1 (
    .clk, .rst_n, .clear, .in_valid, .prod(p1), .result(res1));
  hlog_converter #(.NIN(4), .CNT_W(12), .OUT_W(32)) dut4 (
    .clk, .rst_n, .clear, .in_valid, .prod(p4), .result(res4));

  function automatic hprod_t rand_prod();
    hprod_t p;
    int s;
    s = $urandom_range(0, 14);
    p.sign = 1'($urandom_range(0, 1));
    case ($urandom_range(0, 2))
      0: begin p.e1 = 4'(s); p.e2 = EXP_NONE; end
      1: begin if (s < 1) s = 1; p.e1 = 4'(s); p.e2 = 4'(s - 1); end
      default: begin if (s < 2) s = 2; if (s > 14) s = 14; p.e1 = 4'(s + 1); p.e2 = 4'(s - 2); end
    endcase
    return p;
  endfunction

  task automatic run_sum(int n);
    longint exp1, exp4;
    exp1 = 0; exp4 = 0;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int i = 0; i < n; i++) begin
      p1[0] = rand_prod();
      exp1 += hprod_value(p1[0]);
      for (int j = 0; j < 4; j++) begin
        p4[j] = rand_prod();
        exp4 += hprod_value(p4[j]);
      end
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
    checks++;
    if (res1 != exp1) begin failures++; $display("FAIL NIN=1 n=%0d: %0d expected %0d", n, res1, exp1); end
    checks++;
    if (res4 != exp4) begin failures++; $display("FAIL NIN=4 n=%0d: %0d expected %0d", n, res4, exp4); end
  endtask

  initial begin
    p1[0] = '0;
    for (int j = 0; j < 4; j++) p4[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_sum(1);
    run_sum(17);
    run_sum(768);
    run_sum(64);
    for (int t = 0; t < 10; t++) run_sum($urandom_range(1, 200));
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
