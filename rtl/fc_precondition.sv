// fc_precondition: input conditioning ahead of the Final Correction datapath.
//
// Two checks from the reference software model of the method:
//   * x_is_one is set when X == 1.0. The reciprocal of 1 is 1 (a binade
//     endpoint), so the result is forced to 1.0 downstream instead of being
//     corrected.
//   * An estimate Y below 0.5 lies outside the output binade [0.5,1); it is
//     projected onto the first value of the binade, 0.5.
// Interface: X (24,23) and raw estimate Y (24,24) in, clamped Y and the flag
// out. Purely combinational, no clock.
module fc_precondition
  import fc_pkg::*;
(
  input  sig_t x,         // input significand, (24,23)
  input  sig_t y_in,      // raw reciprocal estimate, (24,24)
  output sig_t y_out,     // estimate, clamped to >= 0.5
  output logic x_is_one,  // X == 1.0
  output logic clamped    // y_in was below 0.5 and was replaced
);

  always_comb begin
    x_is_one = (x == ONE_24_23);
    clamped  = (y_in < HALF_24_24);
    y_out    = clamped ? HALF_24_24 : y_in;
  end

endmodule
