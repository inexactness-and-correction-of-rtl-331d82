// fc_corr_factor: correction-factor block, C = (R[26:22]*Y[23:20] + 2^4) >> 5
// (circuit block 3).
//
// R/X is the error of Y in units of 2^-47; multiplying the leading bits of R by
// the leading bits of Y (which approximates 1/X) estimates that error in ulps of
// Y. Adding half of the final weight before the shift rounds the small product
// to the nearest whole ulp, so C is the correction rounded to nearest and the
// exact answer is Y+C or Y+C+1.
//
// The default parameters give the main configuration: a 5-bit by 4-bit
// multiply with rounding, which corrects underestimates of up to 7 ulps.
// The same block with R_LSB=21, R_BITS=4, Y_BITS=3, ROUND=0 (up to 3 ulps) or
// R_LSB=21, R_BITS=5, Y_BITS=3, ROUND=1 (up to 6 ulps) gives the two smaller
// versions of the method. The shift is derived so that C is in ulps of Y
// (2^-24): 23 - R_LSB + Y_BITS, which is 5 for all three.
// The formula, bit positions and widths are the published ones; deriving the
// shift from the parameters is this design's generalisation.
// Combinational.
module fc_corr_factor
  import fc_pkg::*;
#(
  parameter int unsigned R_LSB  = 22,  // lowest residual bit used
  parameter int unsigned R_BITS = 5,   // residual bits into the multiplier
  parameter int unsigned Y_BITS = 4,   // leading estimate bits into the multiplier
  parameter bit          ROUND  = 1'b1 // add half an ulp before the shift
) (
  input  resid_t r,   // (27,47)
  input  sig_t   y,   // (24,24)
  output corr_t  c    // (3,24), correction in ulps
);

  localparam int unsigned SHIFT = 23 - R_LSB + Y_BITS;
  localparam int unsigned PRODW = R_BITS + Y_BITS;
  localparam int unsigned SUMW  = (PRODW + 1 > SHIFT + C_W) ? PRODW + 1 : SHIFT + C_W;
  localparam logic [SUMW-1:0] RND = ROUND ? (SUMW'(1) << (SHIFT-1)) : '0;

  logic [R_BITS-1:0] r_lead;
  logic [Y_BITS-1:0] y_lead;
  logic [SUMW-1:0]   sum;

  always_comb begin
    r_lead = r[R_LSB +: R_BITS];
    y_lead = y[N-1 -: Y_BITS];
    sum    = SUMW'(r_lead) * SUMW'(y_lead) + RND;
    c      = sum[SHIFT +: C_W];
  end

endmodule
