// fc_tb_pkg: reference arithmetic for the Final Correction testbenches, done in
// plain 64-bit integer arithmetic independently of the datapath.
package fc_tb_pkg;

  // Correctly rounded (to nearest) 24-bit significand of 1/x for a (24,23)
  // significand x in (1,2): round(2^47 / x) = floor((2^48 + x) / (2x)).
  // Ties cannot occur, so the tie direction is irrelevant.
  function automatic logic [23:0] ref_recip(input logic [23:0] x);
    longint unsigned num, den;
    num = (64'd1 << 48) + 64'(x);
    den = 64'(x) << 1;
    return 24'(num / den);
  endfunction

  // Exact residual 2^47 - x*y as a signed 64-bit number.
  function automatic longint ref_residual(input logic [23:0] x, input logic [23:0] y);
    return longint'(64'd1 << 47) - longint'(64'(x) * 64'(y));
  endfunction

  // Random (24,23) significand strictly inside (1,2).
  function automatic logic [23:0] rand_x();
    logic [22:0] f;
    do f = 23'($urandom); while (f == '0);
    return {1'b1, f};
  endfunction

endpackage
