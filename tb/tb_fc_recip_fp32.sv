// tb_fc_recip_fp32: end-to-end test of the single-precision reciprocal: the
// exponent map around the Final Correction unit, at default parameters.
//
// Random normal operands of both signs and all exponents whose reciprocal is
// normal, including powers of two, are given estimates round(1/m) - e for
// e = 0..7 ulps. The expected result is built independently: the exponent from
// the double-precision value of 1/x (found by scaling by powers of two), the
// significand by 64-bit integer division, and the result is also checked to
// lie within half an ulp of 1/x in double precision. Estimates above 1/m must
// raise out_of_range instead. Zero, subnormal, infinite and NaN operands and
// operands with a subnormal reciprocal must raise unsupported.
// Mechanisms counted (each must happen): power-of-two path, general path,
// negative sign, unsupported, out_of_range, estimate clamp, both selector
// values and every correction value C = 0..7.
module tb_fc_recip_fp32;
  import fc_pkg::*;
  import fc_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] x_fp, r_fp;
  sig_t        y_est;
  logic        out_of_range, unsupported;
  int checks = 0, failures = 0;
  int n_pow2 = 0, n_gen = 0, n_neg = 0, n_unsup = 0, n_oor = 0, n_clamp = 0;
  int n_sel1 = 0, n_sel0 = 0;
  int n_c[8] = '{default: 0};

  fc_recip_fp32 dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fp32_to_real(input logic [31:0] b);
    return $bitstoreal({b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'b0});
  endfunction

  // Expected bits of round(1/x) for a normal x with a normal reciprocal.
  function automatic logic [31:0] expected(input logic [31:0] xb);
    real inv;
    int  k;
    logic [23:0] m, sig;
    inv = 1.0 / fp32_to_real(xb);
    if (inv < 0.0) inv = -inv;
    k = 0;                               // 2^k <= |1/x| < 2^(k+1)
    while (inv >= 2.0) begin inv = inv / 2.0; k++; end
    while (inv < 1.0)  begin inv = inv * 2.0; k--; end
    m = {1'b1, xb[22:0]};
    sig = (xb[22:0] == '0) ? 24'h800000 : ref_recip(m);   // (24,24), bit 23 set
    return {xb[31], 8'(k + 127), sig[22:0]};
  endfunction

  task automatic apply(input logic [31:0] xb, input sig_t yv, input bit want_unsup);
    logic [31:0] exp_b;
    sig_t   yc;
    bit     over;
    real    err, inv;
    x_fp = xb; y_est = yv;
    @(posedge clk);
    yc   = yv[23] ? yv : 24'h800000;
    over = (xb[22:0] != '0) && (ref_residual({1'b1, xb[22:0]}, yc) < 0);
    if (dut.u_fc.clamped) n_clamp++;
    if (out_of_range) n_oor++;
    if (unsupported) n_unsup++;
    checks++;
    if (want_unsup) begin
      if (!unsupported) begin
        failures++;
        $display("FAIL x=%h not flagged unsupported", xb);
      end
      return;
    end
    if (unsupported || out_of_range !== over) begin
      failures++;
      $display("FAIL x=%h y=%h flags unsup=%b oor=%b (expected oor=%b)", xb, yv, unsupported,
               out_of_range, over);
      return;
    end
    if (over) return;
    if (xb[22:0] == '0) n_pow2++; else n_gen++;
    if (xb[31]) n_neg++;
    if (xb[22:0] != '0) begin
      if (dut.u_fc.sel) n_sel1++; else n_sel0++;
      n_c[dut.u_fc.c]++;
    end
    exp_b = expected(xb);
    inv   = 1.0 / fp32_to_real(xb);
    err   = fp32_to_real(r_fp) - inv;
    if (err < 0.0) err = -err;
    if (r_fp !== exp_b || err > (fp32_to_real({1'b0, r_fp[30:23], 23'd0}) / 16777216.0)) begin
      failures++;
      $display("FAIL x=%h y=%h -> %h, expected %h", xb, yv, r_fp, exp_b);
    end
  endtask

  initial begin
    logic [31:0] xb;
    sig_t t;
    // powers of two, including the largest exponent with a normal reciprocal
    apply(32'h3f800000, 24'h800000, 1'b0);   // 1.0
    apply(32'hbf800000, 24'h800000, 1'b0);   // -1.0
    apply(32'h00800000, 24'h800000, 1'b0);   // 2^-126 -> 2^126
    apply(32'h7e800000, 24'h800000, 1'b0);   // 2^126 -> 2^-126
    for (int i = 0; i < 15000; i++) begin
      xb = {1'($urandom), 8'(1 + ($urandom % 252)), 23'($urandom)};
      if (i % 50 == 0) xb[22:0] = '0;
      if (i % 97 == 0) xb[22:0] = 23'h7ffff0 | 23'($urandom % 16);  // estimate clamps
      if (xb[22:0] == '0) apply(xb, 24'h800000 - 24'(i % 4), 1'b0);
      else begin
        t = ref_recip({1'b1, xb[22:0]});
        for (int e = 0; e <= 7; e++) apply(xb, t - sig_t'(e), 1'b0);
      end
    end
    // outside the supported range
    apply(32'h00000000, 24'h800000, 1'b1);   // +0
    apply(32'h80000000, 24'h800000, 1'b1);   // -0
    apply(32'h00400000, 24'h800000, 1'b1);   // subnormal
    apply(32'h7f800000, 24'h800000, 1'b1);   // +inf
    apply(32'h7fc00000, 24'h800000, 1'b1);   // NaN
    apply(32'h7f000000, 24'h800000, 1'b1);   // 2^127: reciprocal subnormal
    apply(32'h7e800001, 24'h800000, 1'b1);   // just above 2^126
    $display("mechanisms: pow2=%0d general=%0d negative=%0d unsupported=%0d out_of_range=%0d clamp=%0d sel1=%0d sel0=%0d",
             n_pow2, n_gen, n_neg, n_unsup, n_oor, n_clamp, n_sel1, n_sel0);
    foreach (n_c[k]) $display("  C=%0d: %0d", k, n_c[k]);
    if (n_pow2 == 0 || n_gen == 0 || n_neg == 0 || n_unsup == 0 || n_oor == 0 || n_clamp == 0 ||
        n_sel1 == 0 || n_sel0 == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    foreach (n_c[k]) if (n_c[k] == 0) begin
      failures++;
      $display("FAIL correction C=%0d never happened", k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
