// fc_recip_final_correction: Final Correction unit for the IEEE
// single-precision reciprocal significand.
//
// Given x in (1,2) as a (24,23) significand and an estimate y of 1/x as a
// (24,24) significand that underestimates 1/x by at most 7 ulps, it returns
// round-to-nearest(1/x) as a 24-bit significand, without any final rounding
// step:
//   R   = 1 - x*y                       (fc_residual, exact, 27 bits survive)
//   C   = round(R * y) in ulps           (fc_corr_factor, small 5x4 multiply)
//   sel = 2R < (2C+1)*x                  (fc_compare, carry-out of a 5-way add)
//   out = sel ? y+C : y+C+1              (fc_dual_adder, fc_result_mux)
// The comparison is strict because the exact reciprocal of a floating-point
// number is never a midpoint between two floating-point numbers.
// Input conditioning (fc_precondition) returns 1.0 for x == 1.0 and projects
// an estimate below 0.5 onto 0.5.
//
// Interface: x, y in, result out; out_of_range flags inputs outside the
// precondition (y above 1/x, or R too large for the residual bits the
// correction-factor multiplier reads: R < 2^27 by default), for which the result
// is not guaranteed; it is never raised for x == 1.0. Sign and exponent are
// handled outside this unit (fc_recip_fp32).
// Timing: purely combinational, with no registers: a 24x24 multiplier, a small
// multiplier, a compound adder, a 5-operand adder and a mux in series. No clock
// or latency is specified for the method; a pipeline would be cut to suit the
// surrounding floating-point unit.
// The correction-factor parameters select the 5x4 rounded version (default)
// or the smaller 4x3 and 5x3 versions of the method.
// The block structure and every width follow the published circuit; the
// x == 1 bypass and the clamp follow the published reference code; the
// out_of_range flag is this design's addition (the reference code asserts the
// same conditions).
module fc_recip_final_correction
  import fc_pkg::*;
#(
  parameter int unsigned CF_R_LSB  = 22,
  parameter int unsigned CF_R_BITS = 5,
  parameter int unsigned CF_Y_BITS = 4,
  parameter bit          CF_ROUND  = 1'b1
) (
  input  sig_t x,             // (24,23), 1 <= x < 2
  input  sig_t y,             // (24,24), estimate of 1/x, underestimate
  output sig_t result,        // correctly rounded significand of 1/x
  output logic out_of_range   // precondition violated
);

  sig_t   y_c;
  logic   x_is_one, clamped;
  logic   r_oor;
  resid_t r;
  corr_t  c;
  cand_t  cand;
  logic   sel;
  sig_t   mux_out;

  fc_precondition u_pre (
    .x(x), .y_in(y), .y_out(y_c), .x_is_one(x_is_one), .clamped(clamped)
  );

  fc_residual u_res (
    .x(x), .y(y_c), .r(r), .out_of_range(r_oor)
  );

  fc_corr_factor #(
    .R_LSB(CF_R_LSB), .R_BITS(CF_R_BITS), .Y_BITS(CF_Y_BITS), .ROUND(CF_ROUND)
  ) u_cf (
    .r(r), .y(y_c), .c(c)
  );

  fc_dual_adder u_add (.y(y_c), .c(c), .cand(cand));

  fc_compare u_cmp (.x(x), .c(c), .r(r), .sel(sel));

  fc_result_mux u_mux (.cand(cand), .sel(sel), .result(mux_out));

  // 1/1 = 1: a binade endpoint, passed straight through whatever the estimate.
  assign result       = x_is_one ? ONE_24_23 : mux_out;
  // The correction-factor multiplier reads R[R_LSB +: R_BITS]; residual bits
  // above that window (none in the default configuration) break its
  // precondition as well.
  localparam int unsigned R_TOP = CF_R_LSB + CF_R_BITS;
  logic r_wide;
  always_comb begin
    r_wide = 1'b0;
    for (int i = R_TOP; i < R_W; i++) r_wide |= r[i];
  end

  assign out_of_range = (r_oor | r_wide) & ~x_is_one;

endmodule
