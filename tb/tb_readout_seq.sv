// tb_readout_seq: checks the sequential readout of five channels.
// Channel models answer a start pulse with a frame of random length and random
// valid gaps; the output is taken with random back-pressure. Each event must
// read the channels in order 0..4, each exactly once, and produce the header
// with the event number, a marker before each channel's words, the words
// themselves unchanged, and a trailer with the word count. A start during an
// event must be ignored.
module tb_readout_seq;
  import wfd_pkg::*;

  localparam int N = 5;
  logic clk = 0, rst_n = 0, start = 0, busy;
  logic [N-1:0] ch_start, ch_valid, ch_ready;
  link_word_t ch_word [N];
  logic [LINK_W-1:0] out_word;
  logic out_first, out_last, out_valid, out_ready = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  readout_seq #(.N_CH(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  link_word_t q [N][$];
  link_word_t sent [N][$];
  logic [LINK_W-1:0] expect_q[$], got[$];
  bit got_first[$], got_last[$];
  int order[$];
  bit on [N];

  // channel models: a start pulse queues a frame of random length
  always @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (ch_valid[c] && ch_ready[c]) sent[c].push_back(q[c].pop_front());
      if (ch_start[c] && rst_n) begin
        int len;
        len = 1 + $urandom % 12;
        order.push_back(c);
        for (int i = 0; i < len; i++) begin
          link_word_t w;
          w.first = (i == 0); w.last = (i == len - 1); w.data = 16'($urandom);
          q[c].push_back(w);
        end
      end
    end
  end
  always @(negedge clk) begin
    out_ready <= ($urandom % 100) < 70;
    for (int c = 0; c < N; c++) on[c] = ($urandom % 100) < 60;
  end
  always_comb
    for (int c = 0; c < N; c++) begin
      ch_valid[c] = q[c].size() > 0 && on[c];
      ch_word[c]  = q[c].size() > 0 ? q[c][0] : '0;
    end

  always @(posedge clk) if (out_valid && out_ready) begin
    got.push_back(out_word); got_first.push_back(out_first); got_last.push_back(out_last);
  end

  task automatic event_check(input int evt);
    int n; bit ok;
    n = 0; ok = 1;
    expect_q.delete();
    expect_q.push_back({4'hA, 12'(evt)});
    for (int c = 0; c < N; c++) begin
      expect_q.push_back({4'hC, 12'(c)});
      foreach (sent[c][i]) begin expect_q.push_back(sent[c][i].data); n++; end
      sent[c].delete();
    end
    expect_q.push_back({4'hE, 12'(n)});
    check(got == expect_q, $sformatf("event %0d: %0d words, expected %0d", evt, got.size(), expect_q.size()));
    check(got_first.size() > 0 && got_first[0] && got_last[got_last.size()-1], "first/last flags at event ends");
    for (int i = 1; i < got_first.size(); i++) if (got_first[i]) ok = 0;
    for (int i = 0; i < got_last.size() - 1; i++) if (got_last[i]) ok = 0;
    check(ok, "no first/last inside the event");
    check(order.size() == N, $sformatf("event %0d: %0d channel starts %p", evt, order.size(), order));
    for (int i = 0; i < order.size(); i++) check(order[i] == i, "channels read in order");
    got.delete(); got_first.delete(); got_last.delete(); order.delete();
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 3; e++) begin
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      if (e == 1) begin repeat (5) @(negedge clk); start = 1; @(negedge clk); start = 0; end
      while (busy) @(negedge clk);
      repeat (3) @(negedge clk);
      event_check(e);
    end
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
