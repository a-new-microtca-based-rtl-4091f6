// config_regs: configuration register bank of the controller FPGA.
//
// Holds what the published design keeps in configuration registers: up to
// three acquisition patterns (window count, gap between windows, window
// length), the number of samples kept before and after a front-panel trigger
// in asynchronous mode, the per-channel trigger enables (all or any subset of
// the channels may be triggered), the source of the trigger in synchronous
// mode (TTC, or the front-panel connector for stand-alone use) and the select
// line of the reference clock multiplexer. The bus is a plain synchronous
// write / combinational read port, standing in for the IPbus endpoint that
// reaches it over Ethernet; the register map below is this design's choice.
//
//   0x00 chan_en  [N_CHANNELS-1:0]   (reset: all channels enabled)
//   0x01 clk_sel  [0]  0 = backplane, 1 = front-panel reference clock
//   0x02 pre      [15:0]
//   0x03 post     [31:0]
//   0x04 trig_src [0]  synchronous-mode trigger: 0 = TTC, 1 = front panel
//   0x10 + 4*p + 0 pattern p n_windows [15:0]   (p = 0..2)
//   0x10 + 4*p + 1 pattern p gap       [31:0]
//   0x10 + 4*p + 2 pattern p length    [31:0]
// Unmapped addresses read as zero and ignore writes. Patterns reset to zero.
module config_regs
  import wfd_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  logic [7:0]            addr,
  input  logic [31:0]           wdata,
  output logic [31:0]           rdata,
  output logic [N_CHANNELS-1:0] chan_en,
  output logic                  clk_sel,
  output logic [15:0]           pre,
  output logic [31:0]           post,
  output logic                  trig_src_fp,
  output acq_pattern_t          patterns [N_PATTERNS]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      chan_en  <= '1;
      clk_sel  <= 1'b0;
      pre      <= '0;
      post     <= '0;
      trig_src_fp <= 1'b0;
      for (int p = 0; p < N_PATTERNS; p++) patterns[p] <= '0;
    end else if (wr_en) begin
      unique case (addr)
        8'h00: chan_en <= wdata[N_CHANNELS-1:0];
        8'h01: clk_sel <= wdata[0];
        8'h02: pre     <= wdata[15:0];
        8'h03: post    <= wdata;
        8'h04: trig_src_fp <= wdata[0];
        default: begin
          for (int p = 0; p < N_PATTERNS; p++) begin
            if (32'(addr) == 32'h10 + 4*p)     patterns[p].n_windows <= wdata[15:0];
            if (32'(addr) == 32'h11 + 4*p) patterns[p].gap       <= wdata;
            if (32'(addr) == 32'h12 + 4*p) patterns[p].length    <= wdata;
          end
        end
      endcase
    end
  end

  always_comb begin
    rdata = '0;
    unique case (addr)
      8'h00: rdata = 32'(chan_en);
      8'h01: rdata = 32'(clk_sel);
      8'h02: rdata = 32'(pre);
      8'h03: rdata = post;
      8'h04: rdata = 32'(trig_src_fp);
      default: begin
        for (int p = 0; p < N_PATTERNS; p++) begin
          if (32'(addr) == 32'h10 + 4*p)     rdata = 32'(patterns[p].n_windows);
          if (32'(addr) == 32'h11 + 4*p) rdata = patterns[p].gap;
          if (32'(addr) == 32'h12 + 4*p) rdata = patterns[p].length;
        end
      end
    endcase
  end

endmodule
