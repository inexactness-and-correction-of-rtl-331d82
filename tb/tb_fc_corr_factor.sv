// tb_fc_corr_factor: sweeps all 5-bit residual prefixes against all 4-bit
// estimate prefixes (with random lower bits) and compares C with
// ((R>>22)*(Y>>20) + 16) >> 5 computed in integers. Two further instances
// check the 4x3 unrounded and 5x3 rounded versions the same way.
module tb_fc_corr_factor;
  import fc_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  resid_t r;
  sig_t   y;
  corr_t  c, c43, c53;
  int     checks = 0, failures = 0;

  fc_corr_factor dut (.r(r), .y(y), .c(c));
  fc_corr_factor #(.R_LSB(21), .R_BITS(4), .Y_BITS(3), .ROUND(1'b0)) dut43 (.r(r), .y(y), .c(c43));
  fc_corr_factor #(.R_LSB(21), .R_BITS(5), .Y_BITS(3), .ROUND(1'b1)) dut53 (.r(r), .y(y), .c(c53));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s r=%h y=%h -> %0d expected %0d", what, r, y, got, exp);
    end
  endtask

  initial begin
    int unsigned ru, yu;
    for (int rep = 0; rep < 4; rep++)
      for (int rl = 0; rl < 32; rl++)
        for (int yl = 0; yl < 16; yl++) begin
          r = resid_t'({rl[4:0], 22'($urandom)});
          y = sig_t'({yl[3:0], 20'($urandom)});
          @(posedge clk);
          ru = 32'(r); yu = 32'(y);
          check(int'(c),   int'((((ru >> 22) * (yu >> 20)) + 16) >> 5) & 7, "5x4");
          check(int'(c43), int'((((ru >> 21) & 15) * (yu >> 21)) >> 5) & 7, "4x3");
          check(int'(c53), int'(((((ru >> 21) & 31) * (yu >> 21)) + 16) >> 5) & 7, "5x3");
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
