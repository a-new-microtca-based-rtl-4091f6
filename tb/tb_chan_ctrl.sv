// tb_chan_ctrl: checks one channel end to end against a behavioural DDR3.
// The ADC input is a ramp equal to the cycle number. In synchronous mode a
// trigger with a three-window pattern is followed by a readout; the frame must
// carry the count and exactly the samples of the pattern windows. The channel
// is then switched to asynchronous mode, triggered, and read out; the frame
// must carry the pre/post window around the trigger. Two triggers in
// synchronous mode before one readout must append to the same buffer.
module tb_chan_ctrl;
  import wfd_pkg::*;

  logic clk = 0, rst_n = 0, trig = 0, ro_start = 0, clear = 0, link_ready = 0;
  acq_mode_t mode = MODE_SYNC;
  acq_pattern_t pattern = '0;
  logic [15:0] pre = 0;
  logic [31:0] post = 0;
  sample_t adc_sample;
  ddr_req_t mem_req;
  logic mem_wr_ready, mem_rd_ready, mem_rd_valid;
  logic [DDR_DATA_W-1:0] mem_rd_data;
  link_word_t link;
  logic link_valid, acq_busy, ro_busy, overflow, trig_lost;
  int n_writes, n_stalls;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign adc_sample = sample_t'(cyc);

  chan_ctrl #(.CIRC_DEPTH(256)) dut (.*);
  ddr3_model #(.LAT(6), .STALL_PCT(15)) u_mem (
    .clk, .rst_n, .stall_all(1'b0), .req(mem_req), .wr_ready(mem_wr_ready), .rd_ready(mem_rd_ready),
    .rd_valid(mem_rd_valid), .rd_data(mem_rd_data), .n_writes, .n_stalls
  );

  link_word_t rx[$];
  always @(posedge clk) if (link_valid && link_ready) rx.push_back(link);
  always @(negedge clk) link_ready <= ($urandom % 100) < 60;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pulse_trig(output int unsigned t);
    @(negedge clk); trig = 1; t = cyc; @(negedge clk); trig = 0;
  endtask

  task automatic readout(input sample_t exp[$], input string what);
    int cnt; bit ok;
    @(negedge clk); ro_start = 1; @(negedge clk); ro_start = 0;
    while (ro_busy || acq_busy) @(negedge clk);
    repeat (3) @(negedge clk);
    cnt = (rx.size() >= 2) ? {rx[0].data[10:0], rx[1].data} : -1;
    check(cnt == exp.size() && !rx[0].data[15], $sformatf("%s: count %0d expected %0d", what, cnt, exp.size()));
    check(rx.size() == exp.size() + 2, $sformatf("%s: frame size %0d", what, rx.size()));
    ok = 1;
    for (int i = 0; i < exp.size() && i + 2 < rx.size(); i++) if (rx[i+2].data != 16'(exp[i])) ok = 0;
    check(ok, {what, ": samples"});
    check(rx.size() > 0 && rx[rx.size()-1].last, {what, ": last flag"});
    rx.delete();
  endtask

  sample_t exp_q[$];
  int unsigned t0, t1;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (300) @(negedge clk);
    // synchronous mode, two triggers, one readout
    pattern = '{n_windows: 16'd3, gap: 32'd4, length: 32'd5};
    pulse_trig(t0);
    while (acq_busy) @(negedge clk);
    pattern = '{n_windows: 16'd2, gap: 32'd0, length: 32'd3};
    pulse_trig(t1);
    while (acq_busy) @(negedge clk);
    for (int k = 0; k < 3; k++) for (int i = 0; i < 5; i++) exp_q.push_back(sample_t'(t0 + 1 + k*9 + i));
    for (int i = 0; i < 6; i++) exp_q.push_back(sample_t'(t1 + 1 + i));
    repeat (20) @(negedge clk);
    readout(exp_q, "synchronous");
    exp_q.delete();
    // asynchronous mode
    mode = MODE_ASYNC; pre = 16'd8; post = 32'd12;
    repeat (10) @(negedge clk);
    pulse_trig(t0);
    while (acq_busy) @(negedge clk);
    for (int i = 0; i < 20; i++) exp_q.push_back(sample_t'(t0 - 8 + i));
    repeat (20) @(negedge clk);
    readout(exp_q, "asynchronous");
    exp_q.delete();
    // a trigger in asynchronous mode does not start the pattern sequencer
    check(n_writes == 21 + 20, $sformatf("memory writes %0d", n_writes));
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
