// tb_fc_result_mux: checks that selector 1 returns Y+C and 0 returns Y+C+1.
module tb_fc_result_mux;
  import fc_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  cand_t cand;
  logic  sel;
  sig_t  result;
  int    checks = 0, failures = 0;

  fc_result_mux dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      cand.y_plus_c  = 24'($urandom);
      cand.y_plus_c1 = cand.y_plus_c + 24'd1;
      sel = 1'($urandom);
      @(posedge clk);
      checks++;
      if (result !== (sel ? cand.y_plus_c : cand.y_plus_c1)) begin
        failures++;
        $display("FAIL sel=%b -> %h", sel, result);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
