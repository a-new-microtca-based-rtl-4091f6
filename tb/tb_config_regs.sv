// tb_config_regs: writes every register of the map with random values and
// checks both the read-back and the decoded outputs (channel enables, clock
// select, trigger source, pre/post, the three patterns). Also checks reset values and that
// writes to unmapped addresses change nothing and read as zero.
module tb_config_regs;
  import wfd_pkg::*;

  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [7:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [N_CHANNELS-1:0] chan_en;
  logic clk_sel;
  logic [15:0] pre;
  logic [31:0] post;
  logic trig_src_fp;
  acq_pattern_t patterns [N_PATTERNS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  config_regs dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); addr = a; wdata = d; wr_en = 1;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic rdchk(input logic [7:0] a, input logic [31:0] exp, input string what);
    @(negedge clk); addr = a;
    #1 check(rdata == exp, $sformatf("read %s: %h expected %h", what, rdata, exp));
  endtask

  logic [31:0] v [3][3];
  logic [31:0] e, p0, p1;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(chan_en == 5'h1F && clk_sel == 0 && pre == 0 && post == 0 && trig_src_fp == 0, "reset values");
    e = 32'($urandom) & 32'h1F;
    wr(8'h00, e);  check(chan_en == e[4:0], "chan_en"); rdchk(8'h00, e, "chan_en");
    wr(8'h01, 1);  check(clk_sel == 1, "clk_sel set"); rdchk(8'h01, 1, "clk_sel");
    p0 = $urandom; p1 = $urandom;
    wr(8'h02, p0); check(pre == p0[15:0], "pre"); rdchk(8'h02, {16'b0, p0[15:0]}, "pre");
    wr(8'h04, 1);  check(trig_src_fp == 1, "trigger source front panel"); rdchk(8'h04, 1, "trig_src");
    wr(8'h04, 0);  check(trig_src_fp == 0, "trigger source TTC");
    wr(8'h03, p1); check(post == p1, "post"); rdchk(8'h03, p1, "post");
    for (int p = 0; p < 3; p++)
      for (int f = 0; f < 3; f++) begin
        v[p][f] = $urandom;
        wr(8'(8'h10 + 4*p + f), v[p][f]);
      end
    for (int p = 0; p < 3; p++) begin
      check(patterns[p].n_windows == v[p][0][15:0], $sformatf("pattern %0d n_windows", p));
      check(patterns[p].gap == v[p][1], $sformatf("pattern %0d gap", p));
      check(patterns[p].length == v[p][2], $sformatf("pattern %0d length", p));
      rdchk(8'(8'h10 + 4*p), {16'b0, v[p][0][15:0]}, "n_windows");
      rdchk(8'(8'h11 + 4*p), v[p][1], "gap");
      rdchk(8'(8'h12 + 4*p), v[p][2], "length");
    end
    wr(8'h13, 32'hFFFF_FFFF);
    wr(8'h7F, 32'hFFFF_FFFF);
    rdchk(8'h13, 0, "unmapped 0x13"); rdchk(8'h7F, 0, "unmapped 0x7F");
    check(patterns[0].length == v[0][2] && patterns[1].n_windows == v[1][0][15:0], "unmapped write harmless");
    wr(8'h01, 0);  check(clk_sel == 0, "clk_sel cleared");
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
