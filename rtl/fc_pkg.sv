// fc_pkg: widths and constants shared by the Final Correction datapath for the
// IEEE single-precision reciprocal significand.
//
// Fixed-point conventions (a value "(p,f)" has p stored bits, f of them fraction):
//   X      (24,23)  input significand, 1 <= x < 2
//   Y      (24,24)  reciprocal estimate, 0.5 <= y < 1, an underestimate of 1/x
//   R      (27,47)  residual 1 - x*y, known to fit in 27 bits when y is within 8 ulps
//   C      (3,24)   correction estimate in ulps of Y, 0..7
//   B      (28,47)  branch point (2C+1)*X
// These widths are the ones printed in the circuit diagram of the method
// (24, 24, 27, 5, 4, 3, 24, 24, 1).
package fc_pkg;

  localparam int unsigned N   = 24;  // precision incl. hidden bit
  localparam int unsigned R_W = 27;  // residual bits kept after cancellation
  localparam int unsigned C_W = 3;   // correction estimate bits
  localparam int unsigned B_W = 28;  // branch point / 2R width

  typedef logic [N-1:0]   sig_t;
  typedef logic [R_W-1:0] resid_t;
  typedef logic [C_W-1:0] corr_t;
  typedef logic [B_W-1:0] branch_t;

  // 1.0 in (24,23) format; shares its bit pattern with 0.5 in (24,24).
  localparam sig_t ONE_24_23  = sig_t'(1) << (N-1);
  localparam sig_t HALF_24_24 = ONE_24_23;

  // Candidate pair produced by the dual adder.
  typedef struct packed {
    sig_t y_plus_c;    // Y + C
    sig_t y_plus_c1;   // Y + C + 1
  } cand_t;

endpackage
