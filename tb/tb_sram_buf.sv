// tb_sram_buf: writes random words at random addresses of a full-size
// 192 KB buffer and reads them back on both ports, checking data and the
// one-cycle read latency.
module tb_sram_buf;
  localparam int DEPTH = 3072, WIDTH = 512;
  logic clk = 0, we = 0, re_a = 0, re_b = 0;
  logic [11:0] waddr, raddr_a, raddr_b;
  logic [WIDTH-1:0] wdata, rdata_a, rdata_b;
  logic [WIDTH-1:0] shadow [int];
  int addrs [64];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  sram_buf #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .we, .waddr, .wdata, .re_a, .raddr_a,
    .rdata_a, .re_b, .raddr_b, .rdata_b);

  initial begin
    waddr = 0; raddr_a = 0; raddr_b = 0; wdata = 0;
    foreach (addrs[i]) begin
      addrs[i] = (i == 0) ? 0 : (i == 1) ? DEPTH - 1 : $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      we = 1; waddr = 12'(addrs[i]);
      for (int j = 0; j < WIDTH / 32; j++) wdata[j*32 +: 32] = $urandom;
      shadow[addrs[i]] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (addrs[i]) begin
      re_a = 1; raddr_a = 12'(addrs[i]);
      re_b = 1; raddr_b = 12'(addrs[63 - i]);
      @(negedge clk);
      checks++;
      if (rdata_a != shadow[addrs[i]] || rdata_b != shadow[addrs[63 - i]]) begin
        failures++; $display("FAIL read %0d", addrs[i]);
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
