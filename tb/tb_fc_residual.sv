// tb_fc_residual: checks R = 2^47 - X*Y and the out-of-range flag against
// 64-bit integer arithmetic, for estimates 0..7 ulps below round(1/x), for
// exact and overestimates, and for unrelated random operands.
module tb_fc_residual;
  import fc_pkg::*;
  import fc_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  sig_t   x, y;
  resid_t r;
  logic   out_of_range;
  int     checks = 0, failures = 0;

  fc_residual dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input sig_t xv, input sig_t yv);
    longint rr;
    logic   exp_oor;
    x = xv; y = yv;
    @(posedge clk);
    rr      = ref_residual(xv, yv);
    exp_oor = (rr < 0) || (rr >= (longint'(1) << 27));
    checks++;
    if (out_of_range !== exp_oor || (!exp_oor && r !== resid_t'(rr))) begin
      failures++;
      $display("FAIL x=%h y=%h -> r=%h oor=%b, expected r=%h oor=%b", xv, yv, r, out_of_range,
               resid_t'(rr), exp_oor);
    end
  endtask

  initial begin
    sig_t xv, t;
    for (int i = 0; i < 3000; i++) begin
      xv = rand_x();
      t  = ref_recip(xv);
      for (int e = -2; e <= 8; e++) apply(xv, t - sig_t'(e));
    end
    for (int i = 0; i < 3000; i++) apply(24'($urandom), 24'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
