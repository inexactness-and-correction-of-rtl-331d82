// tb_fc_dual_adder: compares both candidates with Y+C and Y+C+1 on random
// estimates and every correction value.
module tb_fc_dual_adder;
  import fc_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  sig_t  y;
  corr_t c;
  cand_t cand;
  int    checks = 0, failures = 0;

  fc_dual_adder dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned e0, e1;
    for (int i = 0; i < 1000; i++)
      for (int k = 0; k < 8; k++) begin
        y = (i == 0) ? 24'hfffff0 : 24'($urandom);
        c = corr_t'(k);
        @(posedge clk);
        e0 = (32'(y) + 32'(k)) & 32'hffffff;
        e1 = (32'(y) + 32'(k) + 1) & 32'hffffff;
        checks++;
        if (32'(cand.y_plus_c) != e0 || 32'(cand.y_plus_c1) != e1) begin
          failures++;
          $display("FAIL y=%h c=%0d -> %h %h", y, k, cand.y_plus_c, cand.y_plus_c1);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
