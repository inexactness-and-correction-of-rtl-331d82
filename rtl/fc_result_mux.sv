// fc_result_mux: output multiplexer (circuit block 6).
//
// Picks the correctly rounded significand from the two candidates of the dual
// adder: Y+C when the comparator's selector is 1 (2R below the branch point),
// otherwise Y+C+1, as in the published algorithm. Combinational.
module fc_result_mux
  import fc_pkg::*;
(
  input  cand_t cand,
  input  logic  sel,
  output sig_t  result
);

  always_comb result = sel ? cand.y_plus_c : cand.y_plus_c1;

endmodule
