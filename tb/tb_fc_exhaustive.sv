// tb_fc_exhaustive: exhaustive test of the Final Correction unit in its default
// configuration, the test the method was validated with: every single-precision
// significand x strictly inside (1,2) (2^23 - 1 values) with every estimate
// round(1/x) - e, e = 0..7 ulps, about 67 million cases.
//
// An estimate above 1/x (only possible for e = 0) is outside the unit's
// precondition and must raise out_of_range; every other case must return
// round(1/x) exactly. The reference is 64-bit integer division. Estimates that
// fall below 0.5 are clamped inside the unit and still checked. Run time is
// about a minute with verilator.
module tb_fc_exhaustive;
  import fc_pkg::*;
  import fc_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  sig_t x, y, result;
  logic out_of_range;
  longint checks = 0;
  int     failures = 0;
  longint n_oor = 0, n_ok = 0;

  fc_recip_final_correction dut (.*);

  initial begin
    repeat (70_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sig_t   t;
    longint rr;
    for (int unsigned xi = 32'h800001; xi <= 32'hffffff; xi++) begin
      t = ref_recip(24'(xi));
      for (int e = 0; e <= 7; e++) begin
        x = 24'(xi);
        y = t - sig_t'(e);
        @(posedge clk);
        rr = ref_residual(x, y);
        checks++;
        if (rr < 0) begin
          n_oor++;
          if (!out_of_range) begin
            failures++;
            if (failures < 10) $display("FAIL x=%h y=%h overestimate not flagged", x, y);
          end
        end else begin
          n_ok++;
          if (result !== t || out_of_range) begin
            failures++;
            if (failures < 10) $display("FAIL x=%h e=%0d -> %h (oor=%b), expected %h",
                                        x, e, result, out_of_range, t);
          end
        end
      end
    end
    $display("corrected=%0d out_of_range=%0d", n_ok, n_oor);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
