// tb_acq_pattern_seq: checks the synchronous-mode pattern sequencer.
// The ADC input is a ramp equal to the cycle number, so every stored sample
// tells the cycle it came from. For several patterns the stored samples are
// compared with the window/gap arithmetic worked out here, including the
// cycle of the last stored sample, the end of `busy`, and triggers that
// arrive while a pattern runs.
module tb_acq_pattern_seq;
  import wfd_pkg::*;

  logic clk = 0, rst_n = 0, trig = 0;
  acq_pattern_t pattern = '0;
  sample_t adc_sample;
  logic out_valid, busy, trig_lost;
  sample_t out_data;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  sample_t got[$];
  int unsigned last_store_cyc;
  int lost_seen = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign adc_sample = sample_t'(cyc);

  acq_pattern_seq dut (.*);

  always @(posedge clk) begin
    if (out_valid) begin got.push_back(out_data); last_store_cyc = cyc; end
    if (trig_lost) lost_seen++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int n, input int g, input int l, input bit retrig);
    int unsigned t0, exp_n, idx;
    bit ok;
    @(negedge clk);
    pattern = '{n_windows: 16'(n), gap: 32'(g), length: 32'(l)};
    trig = 1; t0 = cyc;
    @(negedge clk); trig = 0;
    if (retrig && busy) begin
      repeat (2) @(negedge clk);
      trig = 1; @(negedge clk); trig = 0;
    end
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    exp_n = (n == 0 || l == 0) ? 0 : n * l;
    check(got.size() == exp_n, $sformatf("pattern %0d/%0d/%0d stored %0d, expected %0d", n, g, l, got.size(), exp_n));
    ok = 1; idx = 0;
    for (int k = 0; k < n && l > 0; k++)
      for (int i = 0; i < l; i++) begin
        if (idx < got.size() && got[idx] != sample_t'(t0 + 1 + k*(l+g) + i)) ok = 0;
        idx++;
      end
    check(ok, $sformatf("pattern %0d/%0d/%0d sample values", n, g, l));
    if (exp_n > 0)
      check(last_store_cyc == t0 + n*l + (n-1)*g, $sformatf("last sample cycle %0d expected %0d", last_store_cyc, t0 + n*l + (n-1)*g));
    got.delete();
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 5, 4, 0);
    run(1, 0, 7, 0);
    run(2, 0, 3, 0);
    run(4, 1, 1, 0);
    run(0, 3, 3, 0);
    run(2, 3, 0, 0);
    run(5, 17, 33, 0);
    run(2, 10, 10, 1);
    check(lost_seen == 1, $sformatf("retrigger during pattern flagged %0d times", lost_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
