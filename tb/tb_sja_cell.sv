// tb_sja_cell: exhaustive check of the shift judgment cell. For every pair of
// valid HLog codes the decoded product must equal the product of the decoded
// codes (HLog products are exact), and the paper's example
// 01011 x 11000 -> 110011000 is checked bit for bit.
module tb_sja_cell;
  import esact_pkg::*;

  hlog_t  d, w;
  hprod_t p;
  int checks = 0, failures = 0;

  sja_cell dut (.d(d), .w(w), .p(p));

  initial begin
    d = 5'b01011; w = 5'b11000; #1;
    checks++; if (p !== 9'b110011000) begin failures++; $display("FAIL example -> %b", p); end
    for (int a = 0; a < 32; a++) begin
      for (int b = 0; b < 32; b++) begin
        d = hlog_t'(a); w = hlog_t'(b);
        // form 1 with exponent 0 is never produced by a shift detector
        if ((d.form && d.exp == 0) || (w.form && w.exp == 0)) continue;
        #1;
        checks++;
        if (hprod_value(p) != hlog_value(d) * hlog_value(w)) begin
          failures++;
          $display("FAIL %b x %b -> %b (%0d, expected %0d)", d, w, p, hprod_value(p),
                   hlog_value(d) * hlog_value(w));
        end
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
