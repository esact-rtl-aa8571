// esact_pkg: types and constants shared by the ESACT sparse transformer
// accelerator.
//
// HLog code (5 bits, from the shift detector): {sign, exp[2:0], form}.
//   form = 0 : magnitude 2^exp
//   form = 1 : magnitude 2^exp + 2^(exp-1)
// HLog product (9 bits, from a shift judgment cell): {sign, e1[3:0], e2[3:0]}.
//   value = (-1)^sign * (2^e1 + 2^e2), or (-1)^sign * 2^e1 when e2 == EXP_NONE.
// The 5-bit and 9-bit layouts follow the paper; the EXP_NONE marker for a
// single-term product is this design's own encoding.
package esact_pkg;

  localparam int unsigned NEXP    = 16;  // exponents 0..15 of a product term
  localparam logic [3:0]  EXP_NONE = 4'hF; // "no second term" (never a valid second exponent)

  typedef struct packed {
    logic       sign;
    logic [2:0] exp;
    logic       form;
  } hlog_t;

  typedef struct packed {
    logic       sign;
    logic [3:0] e1;
    logic [3:0] e2;
  } hprod_t;

  // Which matrix a formal-generation result belongs to.
  typedef enum logic [1:0] {MAT_Q = 2'd0, MAT_K = 2'd1, MAT_V = 2'd2} mat_e;

  // Reference value of an HLog code, used by testbenches.
  function automatic int hlog_value(hlog_t c);
    int m;
    m = (c.form) ? ((1 << c.exp) + (1 << c.exp) / 2) : (1 << c.exp);
    return c.sign ? -m : m;
  endfunction

  // Reference value of an HLog product.
  function automatic int hprod_value(hprod_t p);
    int m;
    m = 1 << p.e1;
    if (p.e2 != EXP_NONE) m += 1 << p.e2;
    return p.sign ? -m : m;
  endfunction

endpackage
