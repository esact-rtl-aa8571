// sja_cell: one adder of the shift judgment array. Multiplies two HLog codes
// with a single exponent addition.
//
// Every HLog magnitude is 2^m or 2^m + 2^(m-1), so a product falls in one of
// three patterns (paper, Fig. 13):
//   both two-term : 2^(a+b+1) + 2^(a+b-2)
//   one two-term  : 2^(a+b)   + 2^(a+b-1)
//   both one-term : 2^(a+b)
// The cell adds a and b once and picks the pattern from the two form bits; the
// product sign is the xor of the input signs. The 9-bit output layout
// {sign, e1, e2} is the paper's; the single-term case marks e2 with EXP_NONE
// (4'hF), which is this design's choice (a valid second exponent is at most 13).
// Combinational.
module sja_cell
  import esact_pkg::*;
(
  input  hlog_t  d,      // data code (embedding or predicted Q), row-broadcast
  input  hlog_t  w,      // weight code (weight or predicted K), column-broadcast
  output hprod_t p
);

  logic [3:0] s;

  always_comb begin
    s      = {1'b0, d.exp} + {1'b0, w.exp};
    p.sign = d.sign ^ w.sign;
    unique case ({d.form, w.form})
      2'b11: begin
        p.e1 = s + 4'd1;
        p.e2 = s - 4'd2;
      end
      2'b10, 2'b01: begin
        p.e1 = s;
        p.e2 = s - 4'd1;
      end
      default: begin
        p.e1 = s;
        p.e2 = EXP_NONE;
      end
    endcase
  end

endmodule
