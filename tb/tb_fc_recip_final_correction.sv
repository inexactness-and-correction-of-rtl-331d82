// tb_fc_recip_final_correction: end-to-end test of the Final Correction unit
// at its default (5x4, rounded) configuration.
//
// For random significands x in (1,2) and for corner values (next to 1, next
// to 2, and patterns such as 0xaaaaaa), the estimate is set to the correctly
// rounded reciprocal minus 0..7 ulps and the output must equal round(1/x),
// computed by 64-bit integer division. With 0 ulps, round(1/x) is above 1/x
// for about half of all x; such an estimate is not an underestimate, and the
// unit must then raise out_of_range instead. The test also drives x == 1.0,
// estimates below 0.5 (clamp), and overestimates by one ulp.
// Each mechanism is counted: the x==1 bypass, the clamp, both selector values,
// every correction value C = 0..7 and the out-of-range flag; one that never
// happens counts as a failure. The unit is combinational, so each vector is
// checked one clock after it is applied.
module tb_fc_recip_final_correction;
  import fc_pkg::*;
  import fc_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  sig_t x, y, result;
  logic out_of_range;
  int   checks = 0, failures = 0;
  int   n_one = 0, n_clamp = 0, n_sel1 = 0, n_sel0 = 0, n_oor = 0;
  int   n_c[8] = '{default: 0};

  fc_recip_final_correction dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Apply (x, y). An estimate above 1/x (negative residual) breaks the
  // precondition and must raise out_of_range; otherwise demand round(1/x).
  task automatic apply(input sig_t xv, input sig_t yv);
    sig_t exp_r;
    bit   expect_oor;
    expect_oor = (xv != 24'h800000) && (ref_residual(xv, yv) < 0);
    x = xv; y = yv;
    @(posedge clk);
    if (dut.x_is_one) n_one++;
    if (dut.clamped)  n_clamp++;
    if (out_of_range) n_oor++;
    if (!dut.x_is_one && !out_of_range) begin
      if (dut.sel) n_sel1++; else n_sel0++;
      n_c[dut.c]++;
    end
    checks++;
    if (expect_oor) begin
      if (!out_of_range) begin
        failures++;
        $display("FAIL overestimate x=%h y=%h not flagged", xv, yv);
      end
    end else begin
      exp_r = (xv == 24'h800000) ? 24'h800000 : ref_recip(xv);
      if (result !== exp_r || out_of_range) begin
        failures++;
        $display("FAIL x=%h y=%h -> %h (oor=%b), expected %h", xv, yv, result, out_of_range, exp_r);
      end
    end
  endtask

  task automatic sweep_errors(input sig_t xv);
    sig_t t;
    t = ref_recip(xv);
    for (int e = 0; e <= 7; e++) apply(xv, t - sig_t'(e));
  endtask

  initial begin
    sig_t corner[8] = '{24'h800001, 24'h800002, 24'hffffff, 24'hfffffe,
                        24'haaaaaa, 24'hc00000, 24'hb504f3, 24'hfff000};
    foreach (corner[i]) sweep_errors(corner[i]);
    for (int i = 0; i < 20000; i++) sweep_errors(rand_x());
    // x == 1.0: the result is 1.0 whatever the estimate
    apply(24'h800000, 24'h800000);
    apply(24'h800000, 24'h7ffffc);
    // overestimates break the precondition
    for (int i = 0; i < 100; i++) begin
      sig_t xv;
      xv = rand_x();
      apply(xv, ref_recip(xv) + 24'd1);
    end
    $display("mechanisms: x_is_one=%0d clamp=%0d sel1=%0d sel0=%0d out_of_range=%0d",
             n_one, n_clamp, n_sel1, n_sel0, n_oor);
    foreach (n_c[k]) $display("  C=%0d: %0d", k, n_c[k]);
    if (n_one == 0 || n_clamp == 0 || n_sel1 == 0 || n_sel0 == 0 || n_oor == 0) begin
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
