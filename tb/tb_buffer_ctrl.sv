// tb_buffer_ctrl: checks the DDR3 buffer manager against a behavioural memory.
// Phase 1: random samples with random gaps are stored while the memory stalls
// at random; a readout with random link back-pressure must return the count
// header and every sample in order, and the memory must have seen one write
// per sample. Phase 2: with the memory stalled, the FIFO fills and the
// overflow flag must rise and appear in the header. Phase 3: a buffer of
// 2**ADDR_W words must stop at full. Phase 4: `clear` empties the buffer.
module tb_buffer_ctrl;
  import wfd_pkg::*;

  localparam int ADDR_W = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, ro_start = 0, clear = 0, link_ready = 0, stall_all = 0;
  sample_t in_data = 0;
  ddr_req_t mem_req;
  logic mem_wr_ready, mem_rd_ready, mem_rd_valid;
  logic [DDR_DATA_W-1:0] mem_rd_data;
  link_word_t link;
  logic link_valid, busy, overflow;
  logic [ADDR_W:0] stored;
  int n_writes, n_stalls;
  int checks = 0, failures = 0;
  int unsigned rdy_pct = 70;

  always #5 clk = ~clk;

  buffer_ctrl #(.ADDR_W(ADDR_W), .FIFO_DEPTH(8)) dut (.*);
  ddr3_model #(.LAT(5), .STALL_PCT(30)) u_mem (
    .clk, .rst_n, .stall_all, .req(mem_req), .wr_ready(mem_wr_ready), .rd_ready(mem_rd_ready),
    .rd_valid(mem_rd_valid), .rd_data(mem_rd_data), .n_writes, .n_stalls
  );

  link_word_t rx[$];
  always @(posedge clk) if (link_valid && link_ready) rx.push_back(link);
  always @(negedge clk) link_ready <= ($urandom % 100) < rdy_pct;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic readout(output int cnt, output bit ovf, output sample_t data[$]);
    int guard = 0;
    @(negedge clk); ro_start = 1; @(negedge clk); ro_start = 0;
    while (!(rx.size() > 0 && rx[rx.size()-1].last) && guard < 20000) begin @(negedge clk); guard++; end
    repeat (3) @(negedge clk);
    check(rx.size() >= 2 && rx[0].first && !rx[1].first, "header words flagged");
    cnt = {rx[0].data[10:0], rx[1].data};
    ovf = rx[0].data[15];
    data.delete();
    for (int i = 2; i < rx.size(); i++) data.push_back(sample_t'(rx[i].data));
    check(rx.size() == cnt + 2, $sformatf("frame has %0d words for count %0d", rx.size(), cnt));
    for (int i = 0; i < rx.size() - 1; i++) if (rx[i].last) check(0, "last before end of frame");
    check(!busy, "idle after readout");
    rx.delete();
  endtask

  sample_t sent[$], back[$];
  int cnt; bit ovf; int w0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // phase 1
    for (int i = 0; i < 150; i++) begin
      in_valid = ($urandom % 2) != 0;
      in_data  = sample_t'($urandom);
      if (in_valid) sent.push_back(in_data);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (20) @(negedge clk);
    check(n_writes == sent.size(), $sformatf("memory writes %0d, samples %0d", n_writes, sent.size()));
    check(32'(stored) == sent.size(), "stored count");
    check(!overflow, "no overflow while memory keeps up");
    check(n_stalls > 0, "memory stalled at least once");
    readout(cnt, ovf, back);
    check(cnt == sent.size() && !ovf, $sformatf("header count %0d ovf %0d", cnt, ovf));
    check(back == sent, "read back data equal the stored samples");
    check(stored == 0, "buffer empty after readout");
    // empty readout
    readout(cnt, ovf, back);
    check(cnt == 0, "empty buffer reads out a count of zero");
    // phase 2: overflow through a stalled memory
    w0 = n_writes;
    stall_all = 1;
    sent.delete();
    for (int i = 0; i < 20; i++) begin in_valid = 1; in_data = sample_t'(i); sent.push_back(in_data); @(negedge clk); end
    in_valid = 0;
    check(overflow, "overflow with stalled memory");
    stall_all = 0;
    repeat (30) @(negedge clk);
    readout(cnt, ovf, back);
    check(ovf && cnt == 8, $sformatf("overflow reported in header, count %0d", cnt));
    for (int i = 0; i < 8 && i < back.size(); i++) check(back[i] == sent[i], "kept samples are the oldest");
    check(!overflow, "overflow cleared by readout");
    // phase 3: memory full
    for (int i = 0; i < 700; i++) begin in_valid = i[0]; in_data = sample_t'(i); @(negedge clk); end
    in_valid = 0;
    repeat (30) @(negedge clk);
    check(32'(stored) == (1 << ADDR_W), $sformatf("stored %0d at memory full", stored));
    check(overflow, "overflow at memory full");
    readout(cnt, ovf, back);
    check(cnt == (1 << ADDR_W) && ovf, "full buffer read out");
    // phase 4: clear
    for (int i = 0; i < 5; i++) begin in_valid = 1; in_data = 12'h5A5; @(negedge clk); end
    in_valid = 0;
    repeat (10) @(negedge clk);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    check(stored == 0, "clear empties the buffer");
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
