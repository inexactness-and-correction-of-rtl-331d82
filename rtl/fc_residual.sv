// fc_residual: residual block, R = 2^47 - X*Y (circuit block 2).
//
// X is (24,23) and Y is (24,24), so X*Y is (48,47) and 2^47 stands for 1.0.
// Because Y is an underestimate of 1/X within 8 ulps, the subtraction cancels
// all but the low 27 bits, and only R[26:0] is passed on (5 bits to the
// correction-factor multiplier, 27 to the comparator).
// out_of_range reports inputs that break this precondition (X*Y > 1, or
// R >= 2^27); it is this design's addition, the reference model only asserts
// the same two conditions.
// Combinational: a 24x24 multiplier followed by a 48-bit subtractor.
module fc_residual
  import fc_pkg::*;
(
  input  sig_t   x,            // (24,23)
  input  sig_t   y,            // (24,24)
  output resid_t r,            // (27,47)
  output logic   out_of_range  // precondition violated, r is meaningless
);

  localparam int unsigned PW = 2*N;            // 48
  localparam logic [PW:0] ONE_48_47 = (PW+1)'(1) << (PW-1);

  logic [PW-1:0] prod;
  logic [PW:0]   r_full;       // one extra bit catches the borrow

  always_comb begin
    prod         = PW'(x) * PW'(y);
    r_full       = ONE_48_47 - {1'b0, prod};
    r            = r_full[R_W-1:0];
    out_of_range = r_full[PW] | (|r_full[PW-1:R_W]);
  end

endmodule
