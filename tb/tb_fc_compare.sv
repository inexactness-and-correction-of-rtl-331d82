// tb_fc_compare: compares the selector with 2R < (2C+1)X evaluated in 64-bit
// integers, on random operands and on residuals placed right at and next to
// the branch point.
module tb_fc_compare;
  import fc_pkg::*;
  import fc_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  sig_t   x;
  corr_t  c;
  resid_t r;
  logic   sel;
  int     checks = 0, failures = 0;

  fc_compare dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input sig_t xv, input corr_t cv, input resid_t rv);
    logic exp_sel;
    x = xv; c = cv; r = rv;
    @(posedge clk);
    exp_sel = (64'(rv) * 2) < ((64'(cv) * 2 + 1) * 64'(xv));
    checks++;
    if (sel !== exp_sel) begin
      failures++;
      $display("FAIL x=%h c=%0d r=%h -> sel=%b", xv, cv, rv, sel);
    end
  endtask

  initial begin
    sig_t xv;
    longint unsigned half_b;
    for (int i = 0; i < 2000; i++) begin
      xv = rand_x();
      for (int k = 0; k < 8; k++) begin
        half_b = ((64'(k) * 2 + 1) * 64'(xv)) >> 1;   // R near B/2
        for (int d = -1; d <= 1; d++)
          if (half_b + 64'(d) < (64'd1 << 27)) apply(xv, corr_t'(k), resid_t'(half_b + 64'(d)));
        apply(xv, corr_t'(k), resid_t'($urandom));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
