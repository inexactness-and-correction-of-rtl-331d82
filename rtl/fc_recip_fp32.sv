// fc_recip_fp32: IEEE single-precision reciprocal built around the Final
// Correction unit, for normal inputs whose reciprocal is normal.
//
// A normal x = (-1)^s * m * 2^e with m in [1,2) has 1/x = (-1)^s * (1/m) * 2^-e.
// For m = 1 this is a power of two and the exponent maps e -> -e; otherwise
// 1/m lies in (0.5,1) and the exponent maps e -> -e-1. The significand 1/m is
// delivered, correctly rounded to nearest, by fc_recip_final_correction from
// the estimate y_est; since rounding never leaves the binade (the estimate is
// an underestimate inside [0.5,1)), the exponent is known from the input alone.
// In biased form: E_out = 254 - E (m = 1) or 253 - E (m > 1). The sign passes
// through.
//
// Zero, subnormal, infinite and NaN inputs, and inputs whose reciprocal is
// subnormal (E >= 253 with m > 1, E = 254 with m = 1), are not handled: they
// raise unsupported and the result is not meaningful. These exception paths
// are this design's boundary, not part of the method.
//
// Interface: x_fp is the operand; y_est is the estimate of 1/m as a (24,24)
// significand (0.5 <= y_est < 1), at most 7 ulps below round(1/m); r_fp is
// the rounded reciprocal. out_of_range is the significand unit's precondition
// flag. The sign bit of r_fp is wired straight from x_fp. Purely
// combinational. The exponent map is the published one; the biased
// arithmetic and the unsupported flag are this design's.
module fc_recip_fp32
  import fc_pkg::*;
(
  input  logic [31:0] x_fp,          // IEEE single operand
  input  sig_t        y_est,         // estimate of 1/significand, (24,24)
  output logic [31:0] r_fp,          // round-to-nearest reciprocal
  output logic        out_of_range,  // estimate outside the unit's precondition
  output logic        unsupported    // zero/subnormal/inf/NaN in, or subnormal out
);

  logic        s;
  logic [7:0]  e_in, e_out;
  logic [22:0] f_in;
  sig_t        m, r_sig;
  logic        m_is_one;

  always_comb begin
    s        = x_fp[31];
    e_in     = x_fp[30:23];
    f_in     = x_fp[22:0];
    m        = {1'b1, f_in};          // (24,23) significand, hidden bit restored
    m_is_one = (f_in == '0);
  end

  fc_recip_final_correction u_fc (
    .x(m), .y(y_est), .result(r_sig), .out_of_range(out_of_range)
  );

  always_comb begin
    // 254 - E for a power of two, 253 - E otherwise (8-bit, wraps when the
    // result would be subnormal; unsupported covers those inputs).
    e_out       = (m_is_one ? 8'd254 : 8'd253) - e_in;
    unsupported = (e_in == 8'd0) || (e_in == 8'hff) ||
                  (m_is_one ? (e_in >= 8'd254) : (e_in >= 8'd253));
    // r_sig is 1/m as (24,24), bit 23 set; 2*(1/m) in [1,2) has fraction
    // r_sig[22:0]. For m = 1, r_sig is 1.0 and the fraction is zero.
    r_fp        = {s, e_out, r_sig[22:0]};
  end

endmodule
