// tb_shift_detector: exhaustive check of the HLog shift detector.
// Every 8-bit input is compared with a reference quantizer that rounds the
// magnitude (the one's complement for negative inputs) to the nearest HLog
// level, ties to the higher level, and the paper's two worked examples are
// checked bit for bit.
module tb_shift_detector;
  import esact_pkg::*;

  logic signed [7:0] data;
  hlog_t             code;
  int checks = 0, failures = 0;

  shift_detector dut (.data(data), .code(code));

  function automatic int ref_quant(int x);
    int m, best, bestd, lv;
    int levels[15] = '{1, 2, 3, 4, 6, 8, 12, 16, 24, 32, 48, 64, 96, 128, 1};
    m = (x < 0) ? (-x - 1) : x;
    best = 1; bestd = 1 << 30;
    for (int i = 0; i < 14; i++) begin
      lv = levels[i];
      // ties go to the higher level: levels are ascending, so use <=
      if ((m > lv ? m - lv : lv - m) <= bestd) begin
        bestd = (m > lv ? m - lv : lv - m);
        best  = lv;
      end
    end
    return (x < 0) ? -best : best;
  endfunction

  initial begin
    #1;
    data = 8'sd42; #1;
    checks++; if (code !== 5'b01011) begin failures++; $display("FAIL 42 -> %b", code); end
    data = -8'sd18; #1;
    checks++; if (code !== 5'b11000) begin failures++; $display("FAIL -18 -> %b", code); end
    for (int v = -128; v < 128; v++) begin
      data = 8'(v); #1;
      checks++;
      if (hlog_value(code) != ref_quant(v)) begin
        failures++;
        $display("FAIL %0d -> code %b = %0d, expected %0d", v, code, hlog_value(code), ref_quant(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
