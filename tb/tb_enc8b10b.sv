// tb_enc8b10b: checks the 8b/10b encoder.
// Known code words (D0.0, D17.7, D21.5, D10.2, K28.5 in both disparities) are
// compared with the published code table. Then a long random stream of data
// bytes and valid control characters is encoded and the properties of the
// code are checked on the serial bit stream: every word has 4, 5 or 6 ones,
// the running disparity alternates correctly and never leaves +-1, no run of
// equal bits is longer than five, the comma patterns 0011111/1100000 appear
// only inside K28.1, K28.5 and K28.7, and no code word stands for two
// different bytes.
module tb_enc8b10b;
  logic clk = 0, rst_n = 0, en = 0, is_k = 0;
  logic [7:0] data = 0;
  logic [9:0] code;
  logic rd;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  enc8b10b dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic enc(input logic [7:0] d, input bit k);
    @(negedge clk); data = d; is_k = k; en = 1;
    @(negedge clk); en = 0;
  endtask

  logic [8:0] seen [logic [9:0]];
  logic [7:0] kcodes [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC, 8'hDC, 8'hFC, 8'hF7, 8'hFB, 8'hFD, 8'hFE};
  bit bits[$];
  int disp;        // running disparity, -1 or +1
  int run, maxrun, bad_comma, bad_weight, bad_rd, clash, ones;
  bit prev_comma_ok;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    enc(8'h00, 0); check(code == 10'b100111_0100, $sformatf("D0.0 RD-: %b", code));
    enc(8'h00, 0); check(code == 10'b100111_0100, "D0.0 keeps RD-");
    enc(8'hBC, 1); check(code == 10'b001111_1010 && rd == 1, $sformatf("K28.5 RD-: %b", code));
    enc(8'hBC, 1); check(code == 10'b110000_0101 && rd == 0, $sformatf("K28.5 RD+: %b", code));
    enc(8'hB5, 0); check(code == 10'b101010_1010, $sformatf("D21.5: %b", code));
    enc(8'h4A, 0); check(code == 10'b010101_0101, $sformatf("D10.2: %b", code));
    enc(8'hF1, 0); check(code == 10'b100011_0111, $sformatf("D17.7 RD- uses A7: %b", code));

    // random stream; the encoder is reset so the stream starts at RD-
    rst_n = 0; @(negedge clk); rst_n = 1;
    disp = -1; run = 0; maxrun = 0; bad_comma = 0; bad_weight = 0; bad_rd = 0; clash = 0;
    for (int i = 0; i < 20000; i++) begin
      bit k; logic [7:0] d; logic [8:0] key;
      k = ($urandom % 8) == 0;
      d = k ? kcodes[$urandom % 12] : 8'($urandom);
      enc(d, k);
      ones = $countones(code);
      if (ones < 4 || ones > 6) bad_weight++;
      disp += 2*ones - 10;
      if (disp != -1 && disp != 1) bad_rd++;
      if ((disp == 1) != rd) bad_rd++;
      key = {k, d};
      if (seen.exists(code) && seen[code] != key) clash++;
      seen[code] = key;
      // comma check inside the word (bits a..g) for non-comma characters
      prev_comma_ok = k && (d == 8'h3C || d == 8'hBC || d == 8'hFC);
      if (!prev_comma_ok && (code[9:3] == 7'b0011111 || code[9:3] == 7'b1100000)) bad_comma++;
      for (int b = 9; b >= 0; b--) bits.push_back(code[b]);
    end
    for (int i = 0; i < bits.size(); i++) begin
      if (i > 0 && bits[i] == bits[i-1]) run++; else run = 1;
      if (run > maxrun) maxrun = run;
    end
    check(bad_weight == 0, $sformatf("%0d words with bad weight", bad_weight));
    check(bad_rd == 0, $sformatf("%0d running-disparity errors", bad_rd));
    check(maxrun <= 5, $sformatf("longest run %0d", maxrun));
    check(bad_comma == 0, $sformatf("%0d commas in non-comma characters", bad_comma));
    check(clash == 0, $sformatf("%0d code words with two meanings", clash));
    check(seen.num() > 400, $sformatf("%0d distinct code words exercised", seen.num()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
