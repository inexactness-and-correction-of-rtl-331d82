// tb_fc_variants: exhaustive test of the two smaller correction-factor
// versions of the unit. For every significand x in (1,2):
//   4-by-3 multiply, no rounding:  estimates round(1/x) - e, e = 0..3
//   5-by-3 multiply, rounded:      estimates round(1/x) - e, e = 0..6
// Each version reads only the residual bits R[25 or 24 : 21], so beside an
// estimate not above 1/x it requires R < 2^26 (5x3) or R < 2^25 (4x3). For
// some x an estimate 6 (resp. 3) ulps below round(1/x) exceeds that; such
// inputs, and estimates above 1/x, must raise out_of_range. All others must
// return round(1/x). Reference: 64-bit integer division.
module tb_fc_variants;
  import fc_pkg::*;
  import fc_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  sig_t x, y, res43, res53;
  logic oor43, oor53;
  longint checks = 0, oor43_n = 0, oor53_n = 0;
  int     failures = 0;

  fc_recip_final_correction #(.CF_R_LSB(21), .CF_R_BITS(4), .CF_Y_BITS(3), .CF_ROUND(1'b0))
    dut43 (.x(x), .y(y), .result(res43), .out_of_range(oor43));
  fc_recip_final_correction #(.CF_R_LSB(21), .CF_R_BITS(5), .CF_Y_BITS(3), .CF_ROUND(1'b1))
    dut53 (.x(x), .y(y), .result(res53), .out_of_range(oor53));

  initial begin
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input sig_t got, input logic oor, input sig_t t, input bit over,
                       input int e, input string what);
    checks++;
    if (over ? !oor : (got !== t || oor)) begin
      failures++;
      if (failures < 10) $display("FAIL %s x=%h e=%0d -> %h (oor=%b), expected %h",
                                  what, x, e, got, oor, t);
    end
  endtask

  initial begin
    sig_t   t;
    bit     over;
    longint rr;
    for (int unsigned xi = 32'h800001; xi <= 32'hffffff; xi++) begin
      t = ref_recip(24'(xi));
      for (int e = 0; e <= 6; e++) begin
        x = 24'(xi);
        y = t - sig_t'(e);
        @(posedge clk);
        rr   = ref_residual(x, y[23] ? y : 24'h800000);   // unit clamps y to 0.5
        over = (rr < 0) || (rr >= (longint'(1) << 26));
        if (over) oor53_n++;
        check(res53, oor53, t, over, e, "5x3");
        if (e <= 3) begin
          over = (rr < 0) || (rr >= (longint'(1) << 25));
          if (over) oor43_n++;
          check(res43, oor43, t, over, e, "4x3");
        end
      end
    end
    $display("out_of_range expected: 4x3 %0d, 5x3 %0d", oor43_n, oor53_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
