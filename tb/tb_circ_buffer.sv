// tb_circ_buffer: checks the asynchronous-mode circular buffer.
// The ADC input is a ramp equal to the cycle number. For a trigger at cycle T
// with `pre` and `post`, the block must emit samples T-pre .. T+post-1 without
// gaps, the first one two cycles after T. Covered: several pre/post values,
// pre = DEPTH-1 (read and write on the same address), pre above DEPTH-1
// (clipped), wrap-around of the RAM, and a trigger during a window.
module tb_circ_buffer;
  import wfd_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0, trig = 0;
  logic [15:0] pre = 0;
  logic [31:0] post = 0;
  sample_t adc_sample, out_data;
  logic out_valid, busy, trig_lost;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  sample_t got[$];
  int unsigned first_cyc;
  bit first_seen;
  int lost_seen = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign adc_sample = sample_t'(cyc * 7 + 3);

  circ_buffer #(.DEPTH(DEPTH)) dut (.*);

  always @(posedge clk) begin
    if (out_valid) begin
      if (!first_seen) begin first_seen = 1; first_cyc = cyc; end
      got.push_back(out_data);
    end
    if (trig_lost) lost_seen++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int p, input int q, input bit retrig);
    int unsigned t0; int pc; bit ok;
    @(negedge clk);
    pre = 16'(p); post = 32'(q);
    trig = 1; t0 = cyc; first_seen = 0;
    @(negedge clk); trig = 0;
    if (retrig) begin @(negedge clk); trig = 1; @(negedge clk); trig = 0; end
    while (busy) @(negedge clk);
    repeat (4) @(negedge clk);
    pc = (p > DEPTH - 1) ? DEPTH - 1 : p;
    check(got.size() == pc + q, $sformatf("pre %0d post %0d: %0d samples", p, q, got.size()));
    ok = 1;
    for (int i = 0; i < got.size(); i++)
      if (got[i] != sample_t'((t0 - pc + i) * 7 + 3)) ok = 0;
    check(ok, $sformatf("pre %0d post %0d: sample values", p, q));
    if (pc + q > 0) check(first_cyc == t0 + 2, $sformatf("first sample at cycle %0d, expected %0d", first_cyc, t0 + 2));
    got.delete();
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);
    run(10, 20, 0);
    run(0, 5, 0);
    run(5, 0, 0);
    run(63, 30, 0);
    run(100, 8, 0);
    run(31, 150, 0);
    run(4, 12, 1);
    check(lost_seen == 1, $sformatf("trigger during window flagged %0d times", lost_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
