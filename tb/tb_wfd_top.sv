// tb_wfd_top: end-to-end test of the whole digitizer at its default sizes.
// Five ADC ramps feed the channels, each channel has a behavioural DDR3 with
// random stalls. The test configures the registers, then runs:
//   * synchronous acquisitions with each of the three stored patterns, chosen
//     by TTC command, on a subset of channels (channel 2 disabled), including
//     a trigger that arrives while a pattern is still running;
//   * a mode switch to asynchronous mode and a front-panel trigger that keeps
//     a pre/post window from the circular buffers;
//   * a buffer overflow on one channel whose memory is held stalled;
//   * a synchronous pattern started by a front-panel trigger;
//   * a clear command, and a reference clock switch to the front panel.
// After each acquisition a TTC readout command reads all channels in turn;
// the 8b/10b byte stream to the AMC13 is rebuilt into words and compared with
// the event worked out here from the ramps, trigger cycles and patterns. Each
// mechanism is counted and one that never happened counts as a failure.
module tb_wfd_top;
  import wfd_pkg::*;

  localparam int N = N_CHANNELS;
  logic clk = 0, rst_n = 0;
  sample_t adc_sample [N];
  ddr_req_t mem_req [N];
  logic [N-1:0] mem_wr_ready, mem_rd_ready, mem_rd_valid;
  logic [DDR_DATA_W-1:0] mem_rd_data [N];
  logic reg_wr = 0;
  logic [7:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic ttc_trig = 0, ttc_cmd_valid = 0;
  logic [7:0] ttc_cmd = 0;
  logic fp_trig = 0, fp_refclk = 0, bp_refclk = 0, synth_refclk;
  logic [9:0] amc13_code;
  logic [N-1:0] ch_overflow, ch_trig_lost, ch_acq_busy, ch_ro_busy;
  logic ro_busy;
  logic [N-1:0] stall_all = '0;
  int n_writes [N], n_stalls [N];
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  always #5 clk = ~clk;
  always #13 bp_refclk = ~bp_refclk;
  always #17 fp_refclk = ~fp_refclk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic sample_t adcv(input int c, input int unsigned t);
    return sample_t'(t * (c + 1) + 100 * c);
  endfunction
  always_comb for (int c = 0; c < N; c++) adc_sample[c] = adcv(c, cyc);

  wfd_top dut (.*);

  for (genvar c = 0; c < N; c++) begin : g_mem
    ddr3_model #(.LAT(8), .STALL_PCT(10)) u_mem (
      .clk, .rst_n, .stall_all(stall_all[c]), .req(mem_req[c]), .wr_ready(mem_wr_ready[c]),
      .rd_ready(mem_rd_ready[c]), .rd_valid(mem_rd_valid[c]), .rd_data(mem_rd_data[c]),
      .n_writes(n_writes[c]), .n_stalls(n_stalls[c])
    );
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int m_pattern [3], m_gap, m_subset, m_mode_switch, m_fp_trig, m_readout, m_trig_lost;
  int m_overflow, m_stall, m_clear, m_clk_switch, m_fp_sync;

  always @(posedge clk) if (rst_n && ch_trig_lost != 0) m_trig_lost++;

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); reg_addr = a; reg_wdata = d; reg_wr = 1;
    @(negedge clk); reg_wr = 0;
  endtask

  task automatic cmd(input logic [7:0] c);
    @(negedge clk); ttc_cmd = c; ttc_cmd_valid = 1;
    @(negedge clk); ttc_cmd_valid = 0;
    @(negedge clk);
  endtask

  // AMC13 byte stream before the encoder, rebuilt into words
  logic [15:0] rcvd[$];
  bit in_frame = 0, have_hi = 0;
  logic [7:0] hi;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_master.u_tx.tx_k && dut.u_master.u_tx.tx_byte == K27_7) begin in_frame = 1; have_hi = 0; end
    else if (dut.u_master.u_tx.tx_k && dut.u_master.u_tx.tx_byte == K29_7) in_frame = 0;
    else if (!dut.u_master.u_tx.tx_k && in_frame) begin
      if (!have_hi) begin hi = dut.u_master.u_tx.tx_byte; have_hi = 1; end
      else begin rcvd.push_back({hi, dut.u_master.u_tx.tx_byte}); have_hi = 0; end
    end
  end

  // expected buffer contents per channel
  sample_t exp_s [N][$];
  bit      exp_ovf [N];
  logic [N-1:0] en_mask = 5'b11011;
  acq_pattern_t pats [3];
  int evt = 0;

  task automatic sync_trigger(input int p, input bit retrig);
    int unsigned t0;
    cmd(8'(CMD_SEL_PAT0 + p));
    @(negedge clk); ttc_trig = 1; t0 = cyc; @(negedge clk); ttc_trig = 0;
    if (retrig) begin @(negedge clk); ttc_trig = 1; @(negedge clk); ttc_trig = 0; end
    repeat (3) @(negedge clk);
    while (ch_acq_busy != 0) @(negedge clk);
    for (int c = 0; c < N; c++) if (en_mask[c])
      for (int k = 0; k < pats[p].n_windows; k++)
        for (int i = 0; i < pats[p].length; i++)
          exp_s[c].push_back(adcv(c, t0 + 2 + k * (pats[p].length + pats[p].gap) + i));
    m_pattern[p]++;
    if (pats[p].n_windows > 1 && pats[p].gap > 0) m_gap++;
  endtask

  task automatic readout_and_check(input string what);
    logic [15:0] exp_q[$];
    int nw;
    rcvd.delete();
    cmd(CMD_READOUT);
    while (ro_busy) @(negedge clk);
    repeat (10) @(negedge clk);
    exp_q.push_back({MARK_HEADER, 12'(evt)});
    nw = 0;
    for (int c = 0; c < N; c++) begin
      int n = exp_s[c].size();
      exp_q.push_back({MARK_CHANNEL, 12'(c)});
      exp_q.push_back({exp_ovf[c], 4'b0, 11'(n >> 16)});
      exp_q.push_back(16'(n));
      foreach (exp_s[c][i]) exp_q.push_back(16'(exp_s[c][i]));
      nw += n + 2;
      exp_s[c].delete();
      exp_ovf[c] = 0;
    end
    exp_q.push_back({MARK_TRAILER, 12'(nw)});
    check(rcvd == exp_q, $sformatf("%s: event of %0d words, expected %0d", what, rcvd.size(), exp_q.size()));
    if (rcvd != exp_q)
      for (int i = 0; i < exp_q.size() && i < rcvd.size(); i++)
        if (rcvd[i] != exp_q[i]) begin $display("  first difference at word %0d: %h vs %h", i, rcvd[i], exp_q[i]); break; end
    evt++;
    m_readout++;
  endtask

  initial begin
    int unsigned t0;
    int guard;
    pats[0] = '{n_windows: 16'd2, gap: 32'd3, length: 32'd4};
    pats[1] = '{n_windows: 16'd1, gap: 32'd0, length: 32'd10};
    pats[2] = '{n_windows: 16'd3, gap: 32'd5, length: 32'd2};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < 3; p++) begin
      wr(8'(8'h10 + 4*p), 32'(pats[p].n_windows));
      wr(8'(8'h11 + 4*p), pats[p].gap);
      wr(8'(8'h12 + 4*p), pats[p].length);
    end
    wr(8'h00, 32'(en_mask));
    wr(8'h02, 32'd6);
    wr(8'h03, 32'd9);

    // synchronous mode, all three patterns, one retrigger while busy
    sync_trigger(1, 1);
    sync_trigger(2, 0);
    sync_trigger(0, 0);
    m_subset++;
    repeat (30) @(negedge clk);
    readout_and_check("synchronous patterns");
    for (int c = 0; c < N; c++) if (!en_mask[c]) check(n_writes[c] == 0, "disabled channel stored nothing");

    // asynchronous mode, front-panel trigger
    cmd(CMD_MODE_ASYNC);
    m_mode_switch++;
    repeat (20) @(negedge clk);
    @(negedge clk); fp_trig = 1; t0 = cyc;
    repeat (5) @(negedge clk); fp_trig = 0;
    repeat (3) @(negedge clk);
    while (ch_acq_busy != 0) @(negedge clk);
    for (int c = 0; c < N; c++) if (en_mask[c])
      for (int i = 0; i < 15; i++) exp_s[c].push_back(adcv(c, t0 + 3 - 6 + i));
    m_fp_trig++;
    repeat (30) @(negedge clk);
    readout_and_check("asynchronous window");

    // back to synchronous mode, overflow on channel 0
    cmd(CMD_MODE_SYNC);
    m_mode_switch++;
    pats[1].length = 32'd40;
    wr(8'h12 + 4, 32'd40);
    stall_all[0] = 1;
    sync_trigger(1, 0);
    check(ch_overflow[0] && ch_overflow[4:1] == 0, $sformatf("overflow flags %b", ch_overflow));
    if (ch_overflow[0]) m_overflow++;
    stall_all[0] = 0;
    exp_ovf[0] = 1;
    exp_s[0] = exp_s[0][0:15];
    repeat (40) @(negedge clk);
    readout_and_check("overflow");

    // synchronous pattern started from the front panel
    wr(8'h04, 1);
    cmd(8'(CMD_SEL_PAT0 + 2));
    @(negedge clk); fp_trig = 1; t0 = cyc;
    repeat (5) @(negedge clk); fp_trig = 0;
    repeat (3) @(negedge clk);
    while (ch_acq_busy != 0) @(negedge clk);
    for (int c = 0; c < N; c++) if (en_mask[c])
      for (int k = 0; k < pats[2].n_windows; k++)
        for (int i = 0; i < pats[2].length; i++)
          exp_s[c].push_back(adcv(c, t0 + 4 + k * (pats[2].length + pats[2].gap) + i));
    m_fp_sync++;
    wr(8'h04, 0);
    repeat (30) @(negedge clk);
    readout_and_check("front-panel trigger, synchronous mode");

    // clear discards the buffers
    sync_trigger(2, 0);
    repeat (30) @(negedge clk);
    cmd(CMD_CLEAR);
    m_clear++;
    for (int c = 0; c < N; c++) exp_s[c].delete();
    readout_and_check("after clear");

    // reference clock select
    wr(8'h01, 1);
    guard = 0;
    for (int i = 0; i < 40; i++) begin
      #3; if (synth_refclk != fp_refclk) guard++;
    end
    wr(8'h01, 0);
    for (int i = 0; i < 40; i++) begin
      #3; if (synth_refclk != bp_refclk) guard++;
    end
    check(guard == 0, $sformatf("reference clock mux: %0d mismatches", guard));
    m_clk_switch++;

    for (int c = 0; c < N; c++) m_stall += n_stalls[c];
    check(m_pattern[0] > 0 && m_pattern[1] > 0 && m_pattern[2] > 0, "each stored pattern used");
    check(m_gap > 0, "pattern with gaps between windows");
    check(m_subset > 0, "subset of channels triggered");
    check(m_mode_switch > 0, "operation mode switched");
    check(m_fp_trig > 0, "front-panel trigger in asynchronous mode");
    check(m_readout > 0, "sequential readout");
    check(m_trig_lost > 0, "trigger during a running pattern");
    check(m_overflow > 0, "buffer overflow");
    check(m_stall > 0, "memory stall");
    check(m_clear > 0, "buffer clear");
    check(m_clk_switch > 0, "reference clock switch");
    check(m_fp_sync > 0, "front-panel trigger in synchronous mode");
    $display("mechanisms: patterns %0d/%0d/%0d gaps %0d subset %0d mode switches %0d fp triggers %0d readouts %0d lost triggers %0d overflows %0d memory stalls %0d clears %0d clock switches %0d fp-triggered patterns %0d",
             m_pattern[0], m_pattern[1], m_pattern[2], m_gap, m_subset, m_mode_switch, m_fp_trig, m_readout,
             m_trig_lost, m_overflow, m_stall, m_clear, m_clk_switch, m_fp_sync);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
