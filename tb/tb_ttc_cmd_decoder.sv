// tb_ttc_cmd_decoder: sends every command code and checks pattern selection,
// mode, and the one-cycle readout/clear pulses one cycle later; also that
// unknown codes and commands without the valid strobe change nothing.
module tb_ttc_cmd_decoder;
  import wfd_pkg::*;

  logic clk = 0, rst_n = 0, cmd_valid = 0;
  logic [7:0] cmd = 0;
  logic [1:0] pattern_sel;
  acq_mode_t mode;
  logic readout_start, clear;
  int checks = 0, failures = 0;
  int n_ro = 0, n_clr = 0;

  always #5 clk = ~clk;
  ttc_cmd_decoder dut (.*);
  always @(posedge clk) begin
    if (readout_start) n_ro++;
    if (clear) n_clr++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input logic [7:0] c, input bit v = 1);
    @(negedge clk); cmd = c; cmd_valid = v;
    @(negedge clk); cmd_valid = 0; cmd = 8'h00;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(pattern_sel == 0 && mode == MODE_SYNC, "reset: pattern 0, synchronous");
    send(8'h12); check(pattern_sel == 2, "select pattern 2");
    send(8'h11); check(pattern_sel == 1, "select pattern 1");
    send(8'h13); check(pattern_sel == 1, "code 0x13 is no pattern");
    send(8'h10); check(pattern_sel == 0, "select pattern 0");
    send(8'h31); check(mode == MODE_ASYNC, "switch to asynchronous");
    send(8'h30, 0); check(mode == MODE_ASYNC, "no change without valid");
    send(8'h30); check(mode == MODE_SYNC, "switch to synchronous");
    // readout pulse: exactly one cycle, in the cycle after the command
    @(negedge clk); cmd = 8'h20; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    check(readout_start == 1, "readout pulse after command");
    @(negedge clk);
    check(readout_start == 0, "readout pulse one cycle long");
    send(8'h40);
    send(8'hFF);
    repeat (2) @(negedge clk);
    check(n_ro == 1 && n_clr == 1, $sformatf("pulses: readout %0d clear %0d", n_ro, n_clr));
    check(pattern_sel == 0 && mode == MODE_SYNC, "unknown code ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
