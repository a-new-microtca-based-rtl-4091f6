// tb_master_ctrl: checks the controller FPGA logic.
// Registers are written over the register bus; TTC commands select each of
// the three patterns in turn, which must then appear on the pattern output.
// In synchronous mode a TTC trigger must reach exactly the enabled channels
// one cycle later, or a front-panel trigger if the trigger source register
// selects it; in asynchronous mode a front-panel trigger edge must reach
// them three cycles after the edge, and TTC triggers must be ignored. A
// readout command must start the channels in order, and the bytes sent to
// the AMC13 must rebuild the framed event. The clock select register must
// drive clk_sel.
module tb_master_ctrl;
  import wfd_pkg::*;

  localparam int N = N_CHANNELS;
  logic clk = 0, rst_n = 0;
  logic reg_wr = 0;
  logic [7:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic ttc_trig = 0, ttc_cmd_valid = 0, fp_trig = 0;
  logic [7:0] ttc_cmd = 0;
  logic clk_sel;
  logic [N-1:0] ch_trig, ch_ro_start, ch_valid, ch_ready;
  acq_mode_t mode;
  acq_pattern_t pattern;
  logic [15:0] pre;
  logic [31:0] post;
  logic ch_clear, ro_busy;
  link_word_t ch_word [N];
  logic [9:0] amc13_code;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  master_ctrl dut (.*);

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
    @(negedge clk);
  endtask

  // trigger monitor
  logic [N-1:0] trig_seen;
  int unsigned trig_cyc;
  always @(posedge clk) if (ch_trig != 0) begin trig_seen = ch_trig; trig_cyc = cyc; end

  // channel models: a start pulse queues a frame of 3 + c words
  link_word_t q [N][$];
  logic [15:0] sent[$];
  always @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (ch_valid[c] && ch_ready[c]) sent.push_back(q[c].pop_front().data);
      if (ch_start_ok(c)) begin
        sent.push_back(16'hC000 | 16'(c));
        for (int i = 0; i < 3 + c; i++) begin
          link_word_t w;
          w.first = (i == 0); w.last = (i == 2 + c); w.data = 16'($urandom);
          q[c].push_back(w);
        end
      end
    end
  end
  function automatic bit ch_start_ok(input int c);
    return ch_ro_start[c] && rst_n;
  endfunction
  always_comb
    for (int c = 0; c < N; c++) begin
      ch_valid[c] = q[c].size() > 0;
      ch_word[c]  = q[c].size() > 0 ? q[c][0] : '0;
    end

  // AMC13 byte stream, as fed to the encoder
  logic [15:0] rcvd[$];
  bit in_frame = 0, have_hi = 0;
  logic [7:0] hi;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_tx.tx_k && dut.u_tx.tx_byte == K27_7) begin in_frame = 1; have_hi = 0; end
    else if (dut.u_tx.tx_k && dut.u_tx.tx_byte == K29_7) in_frame = 0;
    else if (!dut.u_tx.tx_k && in_frame) begin
      if (!have_hi) begin hi = dut.u_tx.tx_byte; have_hi = 1; end
      else begin rcvd.push_back({hi, dut.u_tx.tx_byte}); have_hi = 0; end
    end
  end

  logic [31:0] pv [3][3];
  int unsigned t0;
  logic [15:0] exp_q[$];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < 3; p++) for (int f = 0; f < 3; f++) begin
      pv[p][f] = $urandom;
      wr(8'(8'h10 + 4*p + f), pv[p][f]);
    end
    wr(8'h00, 32'b10110);
    wr(8'h02, 32'd40);
    wr(8'h03, 32'd60);
    check(pre == 40 && post == 60, "pre/post reach the channels");
    wr(8'h01, 1);
    check(clk_sel == 1, "clock select to front panel");
    for (int p = 2; p >= 0; p--) begin
      cmd(8'(8'h10 + p));
      check(pattern == '{n_windows: pv[p][0][15:0], gap: pv[p][1], length: pv[p][2]},
            $sformatf("pattern %0d selected by TTC command", p));
    end
    // synchronous mode: TTC trigger
    trig_seen = 0;
    @(negedge clk); ttc_trig = 1; t0 = cyc; @(negedge clk); ttc_trig = 0;
    repeat (3) @(negedge clk);
    check(trig_seen == 5'b10110 && trig_cyc == t0 + 1, $sformatf("TTC trigger to %b at +%0d", trig_seen, trig_cyc - t0));
    // front-panel trigger ignored in synchronous mode
    trig_seen = 0;
    @(negedge clk); fp_trig = 1; repeat (4) @(negedge clk); fp_trig = 0; repeat (4) @(negedge clk);
    check(trig_seen == 0, "front-panel trigger ignored in synchronous mode");
    // synchronous mode with the front panel as trigger source
    wr(8'h04, 1);
    trig_seen = 0;
    @(negedge clk); ttc_trig = 1; @(negedge clk); ttc_trig = 0; repeat (3) @(negedge clk);
    check(trig_seen == 0, "TTC trigger ignored with front-panel source");
    @(negedge clk); fp_trig = 1; t0 = cyc; repeat (6) @(negedge clk); fp_trig = 0;
    repeat (4) @(negedge clk);
    check(trig_seen == 5'b10110 && trig_cyc == t0 + 3, $sformatf("front-panel trigger in synchronous mode to %b at +%0d", trig_seen, trig_cyc - t0));
    wr(8'h04, 0);
    // asynchronous mode: front-panel trigger
    cmd(CMD_MODE_ASYNC);
    check(mode == MODE_ASYNC, "mode switched to asynchronous");
    trig_seen = 0;
    @(negedge clk); ttc_trig = 1; @(negedge clk); ttc_trig = 0; repeat (3) @(negedge clk);
    check(trig_seen == 0, "TTC trigger ignored in asynchronous mode");
    @(negedge clk); fp_trig = 1; t0 = cyc; repeat (6) @(negedge clk); fp_trig = 0;
    repeat (4) @(negedge clk);
    check(trig_seen == 5'b10110 && trig_cyc == t0 + 3, $sformatf("front-panel trigger to %b at +%0d", trig_seen, trig_cyc - t0));
    // readout
    sent.delete(); rcvd.delete();
    cmd(CMD_READOUT);
    while (ro_busy) @(negedge clk);
    repeat (10) @(negedge clk);
    exp_q.push_back(16'hA000);
    foreach (sent[i]) exp_q.push_back(sent[i]);
    exp_q.push_back(16'hE000 | 16'(3 + 4 + 5 + 6 + 7));
    check(rcvd == exp_q, $sformatf("AMC13 event: %0d words, expected %0d", rcvd.size(), exp_q.size()));
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
