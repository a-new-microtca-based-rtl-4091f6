// wfd_top: logic of the five-channel MicroTCA waveform digitizer.
//
// The board digitizes five calorimeter signals, each with a 12-bit, 800-MSPS
// ADC, and buffers them in one 1-Gbit DDR3 per channel. Five channel FPGAs
// (chan_ctrl) select which samples are kept, either by a triggered pattern of
// sampling windows or by a pre/post window around a front-panel trigger taken
// from a circular buffer. A controller FPGA (master_ctrl) configures them,
// routes triggers, reads their buffers sequentially and ships each event to the
// AMC13 as 8b/10b code words. A 2:1 multiplexer chooses the backplane or the
// front-panel reference clock for the clock synthesizer.
//
// Everything that is not logic stays outside and appears as ports: the ADC
// samples, the DDR3 word ports (standing in for memory controller, PHY and
// chip), the decoded TTC trigger and command, the register bus behind IPbus,
// the reference clocks and the 10-bit words for the AMC13 serializer. The whole
// design runs on one clock with one sample per clock; the real board runs the
// channels from the synthesizer's sampling clocks and joins the FPGAs with
// 5-Gbit/s serial links, which are modelled here as parallel word streams.
module wfd_top
  import wfd_pkg::*;
#(
  parameter int unsigned N_CH       = N_CHANNELS,
  parameter int unsigned ADDR_W     = DDR_ADDR_W,
  parameter int unsigned CIRC_DEPTH = 4096
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ADCs
  input  sample_t               adc_sample   [N_CH],
  // DDR3 word ports, one per channel
  output ddr_req_t              mem_req      [N_CH],
  input  logic [N_CH-1:0]       mem_wr_ready,
  input  logic [N_CH-1:0]       mem_rd_ready,
  input  logic [N_CH-1:0]       mem_rd_valid,
  input  logic [DDR_DATA_W-1:0] mem_rd_data  [N_CH],
  // register bus (IPbus)
  input  logic                  reg_wr,
  input  logic [7:0]            reg_addr,
  input  logic [31:0]           reg_wdata,
  output logic [31:0]           reg_rdata,
  // TTC
  input  logic                  ttc_trig,
  input  logic                  ttc_cmd_valid,
  input  logic [7:0]            ttc_cmd,
  // front panel
  input  logic                  fp_trig,
  input  logic                  fp_refclk,
  // backplane reference clock and clock synthesizer input
  input  logic                  bp_refclk,
  output logic                  synth_refclk,
  // AMC13 link
  output logic [9:0]            amc13_code,
  // status
  output logic [N_CH-1:0]       ch_overflow,
  output logic [N_CH-1:0]       ch_trig_lost,
  output logic [N_CH-1:0]       ch_acq_busy,
  output logic [N_CH-1:0]       ch_ro_busy,
  output logic                  ro_busy
);

  logic              clk_sel;
  logic [N_CH-1:0]   ch_trig, ch_ro_start, ch_valid, ch_ready;
  logic              ch_clear;
  acq_mode_t         mode;
  acq_pattern_t      pattern;
  logic [15:0]       pre;
  logic [31:0]       post;
  link_word_t        ch_word [N_CH];

  master_ctrl #(.N_CH(N_CH)) u_master (
    .clk, .rst_n, .reg_wr, .reg_addr, .reg_wdata, .reg_rdata,
    .ttc_trig, .ttc_cmd_valid, .ttc_cmd, .fp_trig, .clk_sel,
    .ch_trig, .mode, .pattern, .pre, .post, .ch_ro_start, .ch_clear,
    .ch_word, .ch_valid, .ch_ready, .amc13_code, .ro_busy
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    chan_ctrl #(.ADDR_W(ADDR_W), .CIRC_DEPTH(CIRC_DEPTH)) u_chan (
      .clk, .rst_n, .adc_sample(adc_sample[c]), .trig(ch_trig[c]), .mode, .pattern,
      .pre, .post, .ro_start(ch_ro_start[c]), .clear(ch_clear),
      .mem_req(mem_req[c]), .mem_wr_ready(mem_wr_ready[c]), .mem_rd_ready(mem_rd_ready[c]),
      .mem_rd_valid(mem_rd_valid[c]), .mem_rd_data(mem_rd_data[c]),
      .link(ch_word[c]), .link_valid(ch_valid[c]), .link_ready(ch_ready[c]),
      .acq_busy(ch_acq_busy[c]), .ro_busy(ch_ro_busy[c]), .overflow(ch_overflow[c]),
      .trig_lost(ch_trig_lost[c])
    );
  end

  ref_clk_mux u_clkmux (
    .bp_refclk, .fp_refclk, .sel(clk_sel), .refclk_out(synth_refclk)
  );

endmodule
