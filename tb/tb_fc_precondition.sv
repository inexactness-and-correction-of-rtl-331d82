// tb_fc_precondition: checks the X==1 detection and the clamp of an estimate
// below 0.5 against direct comparisons, on corner values and random inputs.
module tb_fc_precondition;
  import fc_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  sig_t x, y_in, y_out;
  logic x_is_one, clamped;
  int   checks = 0, failures = 0;

  fc_precondition dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input sig_t xv, input sig_t yv);
    logic exp_one, exp_clamp;
    sig_t exp_y;
    x = xv; y_in = yv;
    @(posedge clk);
    exp_one   = (xv == 24'h800000);
    exp_clamp = (yv[23] == 1'b0);
    exp_y     = exp_clamp ? 24'h800000 : yv;
    checks++;
    if (x_is_one !== exp_one || clamped !== exp_clamp || y_out !== exp_y) begin
      failures++;
      $display("FAIL x=%h y=%h -> one=%b clamp=%b y_out=%h", xv, yv, x_is_one, clamped, y_out);
    end
  endtask

  initial begin
    apply(24'h800000, 24'h800000);
    apply(24'h800001, 24'h7fffff);
    apply(24'hffffff, 24'h7ffff9);
    apply(24'hffffff, 24'hffffff);
    apply(24'h800000, 24'h000000);
    for (int i = 0; i < 5000; i++) apply(24'($urandom), 24'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
