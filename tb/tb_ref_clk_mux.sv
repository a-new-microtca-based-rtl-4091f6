// tb_ref_clk_mux: drives two clocks of different periods and checks that the
// output follows the selected one at every sample point, for both selects.
module tb_ref_clk_mux;
  logic bp_refclk = 0, fp_refclk = 0, sel = 0, refclk_out;
  int checks = 0, failures = 0;
  int edges_bp = 0, edges_fp = 0;

  always #5 bp_refclk = ~bp_refclk;
  always #7 fp_refclk = ~fp_refclk;
  ref_clk_mux dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int s = 0; s < 2; s++) begin
      sel = s[0];
      for (int i = 0; i < 50; i++) begin
        #3;
        if ($time % 5 != 0 && $time % 7 != 0) check(refclk_out == (s ? fp_refclk : bp_refclk), $sformatf("sel %0d at step %0d", s, i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
