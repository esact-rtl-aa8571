// shift_detector: HLog quantizer of one 8-bit two's complement value.
//
// HLog levels are the powers of two and the midpoints between neighbouring
// powers: 1, 2, 3, 4, 6, 8, 12, ... 64, 96, 128. A value half-way between two
// levels goes to the higher one. For a non-negative input the unit finds the
// first leading one at bit X; for a negative input the first leading zero. The
// bit at X and the two bits below it decide the code without comparators:
//   xor1 = b[X] ^ b[X-1], xor2 = b[X] ^ b[X-2]   (undo the sign)
//   xor3 = xor1 ^ xor2  -> code (X, 1)   i.e. 2^X + 2^(X-1)
//   else or1 = xor1 | xor2 : 1 -> (X, 0), 0 -> (X+1, 0)
// A negative input is thereby quantized through its one's complement (~x), so
// -18 becomes -16 as in the paper's example; 0 becomes +1 and -1 becomes -1,
// since the code has no zero. Bits below bit 0 read as the sign-free value 0.
// Gate names and the two worked examples (42 -> (5,1) = 01011, -18 -> (4,0) =
// 11000) are the paper's; the order of the gate inputs, the handling of 0 and
// the use of the one's complement for negatives were chosen to reproduce them.
//
// Purely combinational: code is valid in the same cycle as data.
module shift_detector
  import esact_pkg::*;
(
  input  logic signed [7:0] data,
  output hlog_t             code
);

  logic       sgn;
  logic [6:0] mag;      // value bits with the sign undone (one's complement for negatives)
  logic [2:0] x;        // position of the leading one of mag
  logic       found;
  logic       b1, b2;   // normalized bits X-1 and X-2
  logic       xor1, xor2, xor3, or1;

  always_comb begin
    sgn   = data[7];
    mag   = sgn ? ~data[6:0] : data[6:0];
    x     = 3'd0;
    found = 1'b0;
    for (int i = 6; i >= 0; i--) begin
      if (!found && mag[i]) begin
        x     = 3'(i);
        found = 1'b1;
      end
    end
    b1 = (x >= 3'd1) ? mag[x - 3'd1] : 1'b0;
    b2 = (x >= 3'd2) ? mag[x - 3'd2] : 1'b0;
    // Gates as named in the paper; on the raw bits the leading bit equals ~sign,
    // so xor-ing with it inverts the following bits of a positive value.
    xor1 = 1'b1 ^ b1;
    xor2 = 1'b1 ^ b2;
    xor3 = xor1 ^ xor2;
    or1  = xor1 | xor2;
    code.sign = sgn;
    if (xor3) begin
      code.exp  = x;
      code.form = 1'b1;
    end else if (or1) begin
      code.exp  = x;
      code.form = 1'b0;
    end else begin
      code.exp  = x + 3'd1;
      code.form = 1'b0;
    end
  end

endmodule
