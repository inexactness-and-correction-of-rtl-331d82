// fc_dual_adder: compound adder producing both candidates Y+C and Y+C+1
// (circuit block 4).
//
// The two sums differ only by the carry-in, so they are formed side by side
// from one operand pair: Y+C with carry-in 0 and with carry-in 1. The
// selector from the comparator then picks one without waiting for another add.
// Y is (24,24), C is a 3-bit ulp count; both sums are 24 bits (the corrected
// reciprocal of x in (1,2) stays below 1, so no carry out of bit 23 is kept).
// The block and its two outputs are as published; its internal structure is
// not, so it is written as two plain additions and left to synthesis.
// Combinational.
module fc_dual_adder
  import fc_pkg::*;
(
  input  sig_t  y,
  input  corr_t c,
  output cand_t cand
);

  always_comb begin
    cand.y_plus_c  = y + N'(c);
    cand.y_plus_c1 = y + N'(c) + N'(1);
  end

endmodule
