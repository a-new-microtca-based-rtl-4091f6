// tb_wfd_workload: longer synchronous-mode workload on the whole card.
// All five channels take a pattern of 16 windows of 2000 samples with gaps of
// 1000 samples (32,000 samples per channel, 160,000 in all), then the card is
// read out. Checked: every channel stores one sample per clock during its
// windows (the acquisition lasts exactly 16*2000 + 15*1000 cycles), the event
// carries every sample of every channel in order (compared word by word with
// the ramps), and the AMC13 link moves one 16-bit word per two clocks, so the
// readout takes at least two clocks per word and not more than three.
// The memories here never refuse a write: the channel's memory port takes one
// word per clock, the same as the sample rate, so during a window longer than
// the write FIFO a stalling memory would lose samples (tb_wfd_top shows that
// overflow case).
module tb_wfd_workload;
  import wfd_pkg::*;

  localparam int N = N_CHANNELS;
  localparam int NW = 16, LEN = 2000, GAP = 1000;
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
  int n_writes [N], n_stalls [N];
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic sample_t adcv(input int c, input int unsigned t);
    return sample_t'(t * (2 * c + 1) + 37 * c);
  endfunction
  always_comb for (int c = 0; c < N; c++) adc_sample[c] = adcv(c, cyc);

  wfd_top dut (.*);

  for (genvar c = 0; c < N; c++) begin : g_mem
    ddr3_model #(.LAT(8), .STALL_PCT(0)) u_mem (
      .clk, .rst_n, .stall_all(1'b0), .req(mem_req[c]), .wr_ready(mem_wr_ready[c]),
      .rd_ready(mem_rd_ready[c]), .rd_valid(mem_rd_valid[c]), .rd_data(mem_rd_data[c]),
      .n_writes(n_writes[c]), .n_stalls(n_stalls[c])
    );
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); reg_addr = a; reg_wdata = d; reg_wr = 1;
    @(negedge clk); reg_wr = 0;
  endtask

  task automatic cmd(input logic [7:0] c);
    @(negedge clk); ttc_cmd = c; ttc_cmd_valid = 1;
    @(negedge clk); ttc_cmd_valid = 0;
  endtask

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

  // acquisition span seen on the busy flags
  int unsigned busy_first, busy_last;
  bit busy_seen = 0;
  always @(posedge clk) if (rst_n && ch_acq_busy[0]) begin
    if (!busy_seen) begin busy_seen = 1; busy_first = cyc; end
    busy_last = cyc;
  end

  initial begin
    int unsigned t0, ro0, ro1;
    int idx, bad, nwords;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(8'h18, NW);
    wr(8'h19, GAP);
    wr(8'h1A, LEN);
    cmd(CMD_SEL_PAT0 + 8'd2);
    repeat (3) @(negedge clk);
    @(negedge clk); ttc_trig = 1; t0 = cyc; @(negedge clk); ttc_trig = 0;
    repeat (3) @(negedge clk);
    while (ch_acq_busy != 0) @(negedge clk);
    check(busy_last - busy_first + 1 == NW * LEN + (NW - 1) * GAP,
          $sformatf("acquisition lasted %0d cycles, pattern spans %0d", busy_last - busy_first + 1, NW * LEN + (NW - 1) * GAP));
    repeat (40) @(negedge clk);
    for (int c = 0; c < N; c++) check(n_writes[c] == NW * LEN, $sformatf("channel %0d wrote %0d words", c, n_writes[c]));
    check(ch_overflow == 0 && ch_trig_lost == 0, "no overflow, no lost trigger");

    cmd(CMD_READOUT);
    ro0 = cyc;
    @(negedge clk);
    while (ro_busy) @(negedge clk);
    ro1 = cyc;
    repeat (10) @(negedge clk);
    nwords = 2 + N * (NW * LEN + 3);
    check(rcvd.size() == nwords, $sformatf("event of %0d words, expected %0d", rcvd.size(), nwords));
    // walk the event
    idx = 1; bad = 0;
    for (int c = 0; c < N && idx < rcvd.size(); c++) begin
      if (rcvd[idx] != {MARK_CHANNEL, 12'(c)}) bad++;
      if ({rcvd[idx+1][10:0], rcvd[idx+2]} != NW * LEN) bad++;
      idx += 3;
      for (int k = 0; k < NW; k++)
        for (int i = 0; i < LEN; i++) begin
          if (idx < rcvd.size() && rcvd[idx] != 16'(adcv(c, t0 + 2 + k * (LEN + GAP) + i))) bad++;
          idx++;
        end
    end
    check(bad == 0, $sformatf("%0d words differ from the pattern of the ramps", bad));
    check(rcvd.size() > 0 && rcvd[rcvd.size()-1] == {MARK_TRAILER, 12'((N * (NW * LEN + 2)) % 4096)}, "trailer");
    check(ro1 - ro0 >= 2 * nwords && ro1 - ro0 <= 3 * nwords,
          $sformatf("readout took %0d clocks for %0d words", ro1 - ro0, nwords));
    $display("acquired %0d samples per channel in %0d cycles, read %0d words in %0d clocks",
             NW * LEN, busy_last - busy_first + 1, nwords, ro1 - ro0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
