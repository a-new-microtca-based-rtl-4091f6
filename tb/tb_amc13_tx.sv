// tb_amc13_tx: checks the AMC13 link framing.
// Events of random length are offered with random gaps between words. The
// byte stream shown on tx_byte/tx_k is parsed: between a K27.7 start and a
// K29.7 end the data bytes, high byte first, must rebuild exactly the words
// sent, K28.5 fill bytes aside, and only K28.5 may appear between events.
// Idle code words must be a K28.5 of either disparity. With the source always
// ready, an event of n words must take 2n+2 byte slots from start to end.
module tb_amc13_tx;
  import wfd_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [LINK_W-1:0] in_word = 0;
  logic in_first = 0, in_last = 0, in_valid = 0, in_ready;
  logic [9:0] code;
  logic [7:0] tx_byte;
  logic tx_k;
  int checks = 0, failures = 0;
  int gap_pct = 40;

  always #5 clk = ~clk;
  amc13_tx dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [15:0] sent[$], rcvd[$];
  bit in_frame = 0, have_hi = 0;
  logic [7:0] hi;
  int stray = 0, bad_idle = 0, sof_cyc, frame_len = -1, cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;
  bit mon_on = 0;  // the encoder output is meaningful from the second cycle after reset
  always @(posedge clk) if (mon_on) begin
    if (tx_k && tx_byte == K28_5 && !(code == 10'b0011111010 || code == 10'b1100000101)) bad_idle++;
    if (tx_k && tx_byte == K27_7) begin in_frame = 1; have_hi = 0; sof_cyc = cyc; end
    else if (tx_k && tx_byte == K29_7) begin in_frame = 0; frame_len = cyc - sof_cyc + 1; end
    else if (!tx_k) begin
      if (!in_frame) stray++;
      else if (!have_hi) begin hi = tx_byte; have_hi = 1; end
      else begin rcvd.push_back({hi, tx_byte}); have_hi = 0; end
    end else if (tx_byte != K28_5) stray++;
  end

  task automatic send_event(input int n);
    for (int i = 0; i < n; i++) begin
      while (($urandom % 100) < gap_pct) @(negedge clk);
      in_word = 16'($urandom); in_first = (i == 0); in_last = (i == n - 1); in_valid = 1;
      sent.push_back(in_word);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk); in_valid = 0;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    mon_on = 1;
    repeat (3) @(negedge clk);
    for (int e = 0; e < 6; e++) begin
      send_event(1 + $urandom % 20);
      repeat (8) @(negedge clk);
    end
    check(rcvd == sent, $sformatf("words rebuilt from bytes: %0d of %0d", rcvd.size(), sent.size()));
    gap_pct = 0;
    send_event(10);
    repeat (8) @(negedge clk);
    check(frame_len == 2*10 + 2, $sformatf("10-word frame took %0d byte slots", frame_len));
    check(rcvd == sent, "back-to-back words");
    check(stray == 0, $sformatf("%0d stray bytes outside frames", stray));
    check(bad_idle == 0, $sformatf("%0d bad idle code words", bad_idle));
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
