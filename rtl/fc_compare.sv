// fc_compare: branch-point comparison 2R < (2C+1)*X (circuit block 5).
//
// Because C has only 3 bits, the branch point (2C+1)*X is the sum of four
// partial products: X, and 2X, 4X, 8X gated by C[0], C[1], C[2]. Adding the
// one's complement of 2R to them in a 28-bit window gives
//   2^28 + B - 2R - 1,
// whose carry-out (bit 28) is 1 exactly when 2R < B. That carry-out of the
// 5-way add is the selector: 1 picks Y+C, 0 picks Y+C+1. No equality test is
// needed because the exact reciprocal is never a rounding midpoint.
// The inequality, the partial-product split and the use of the carry-out are
// as published; the one's-complement window and the polarity (taken from the
// algorithm's if/else) are spelled out here.
// Combinational.
module fc_compare
  import fc_pkg::*;
(
  input  sig_t   x,    // (24,23)
  input  corr_t  c,    // (3,24)
  input  resid_t r,    // (27,47)
  output logic   sel   // 1: 2R < (2C+1)X
);

  localparam int unsigned SW = B_W + 1;   // 29-bit sum, bit 28 is the carry-out

  logic [B_W-1:0] r2_n;                     // one's complement of 2R
  logic [SW-1:0]  pp0, pp1, pp2, pp3, sum;

  always_comb begin
    pp0 = SW'(x);
    pp1 = c[0] ? SW'(x) << 1 : '0;
    pp2 = c[1] ? SW'(x) << 2 : '0;
    pp3 = c[2] ? SW'(x) << 3 : '0;
    r2_n = ~{r, 1'b0};
    sum  = pp0 + pp1 + pp2 + pp3 + SW'(r2_n);
    sel  = sum[B_W];
  end

endmodule
