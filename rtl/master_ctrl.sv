// master_ctrl: the controller FPGA of the digitizer.
//
// A sixth FPGA configures and reads out the five channel FPGAs. It holds the
// configuration registers (written over the module management network), acts
// on TTC control commands (pattern selection, operation mode, readout start),
// routes triggers to the channels, reads the channels' buffers one after the
// other and sends the resulting event to the AMC13 as an 8b/10b stream. It
// also drives the select line of the reference clock multiplexer. This follows
// the published architecture; the register bus, command codes, event framing
// and trigger synchronisation are this design's choices.
//
// Trigger routing: in synchronous mode the TTC trigger (or, if the trigger
// source register says so, the front-panel trigger, for stand-alone use), in
// asynchronous mode the front-panel trigger, is sent to every channel whose
// enable bit is set, so any subset of channels can be triggered. The
// front-panel trigger is an asynchronous level input: it passes two
// synchronising flops and its rising edge makes a one-cycle trigger, three
// cycles after the edge. The TTC trigger
// is a one-cycle strobe in this clock domain and is registered once. The
// channel configuration (mode, selected pattern, pre/post) is sent to the
// channels as steady signals; the serial links that carry it between FPGAs
// are outside this block.
module master_ctrl
  import wfd_pkg::*;
#(
  parameter int unsigned N_CH = N_CHANNELS
) (
  input  logic              clk,
  input  logic              rst_n,
  // register bus (reached over IPbus)
  input  logic              reg_wr,
  input  logic [7:0]        reg_addr,
  input  logic [31:0]       reg_wdata,
  output logic [31:0]       reg_rdata,
  // TTC: decoded trigger strobe and broadcast command
  input  logic              ttc_trig,
  input  logic              ttc_cmd_valid,
  input  logic [7:0]        ttc_cmd,
  // front-panel trigger (asynchronous)
  input  logic              fp_trig,
  // reference clock multiplexer select
  output logic              clk_sel,
  // to the channels
  output logic [N_CH-1:0]   ch_trig,
  output acq_mode_t         mode,
  output acq_pattern_t      pattern,
  output logic [15:0]       pre,
  output logic [31:0]       post,
  output logic [N_CH-1:0]   ch_ro_start,
  output logic              ch_clear,
  input  link_word_t        ch_word  [N_CH],
  input  logic [N_CH-1:0]   ch_valid,
  output logic [N_CH-1:0]   ch_ready,
  // to the AMC13
  output logic [9:0]        amc13_code,
  output logic              ro_busy
);

  logic [N_CHANNELS-1:0] chan_en;
  logic                  trig_src_fp;
  logic                  trig_any;
  acq_pattern_t          patterns [N_PATTERNS];
  logic [1:0]            pattern_sel;
  logic                  ro_cmd;
  logic [2:0]            fp_sync;
  logic                  fp_edge;
  logic [LINK_W-1:0]     ev_word;
  logic                  ev_first, ev_last, ev_valid, ev_ready;
  logic [7:0]            tx_byte_unused;
  logic                  tx_k_unused;

  config_regs u_regs (
    .clk, .rst_n, .wr_en(reg_wr), .addr(reg_addr), .wdata(reg_wdata), .rdata(reg_rdata),
    .chan_en, .clk_sel, .pre, .post, .trig_src_fp, .patterns
  );

  ttc_cmd_decoder u_ttc (
    .clk, .rst_n, .cmd_valid(ttc_cmd_valid), .cmd(ttc_cmd),
    .pattern_sel, .mode, .readout_start(ro_cmd), .clear(ch_clear)
  );

  always_comb begin
    pattern = (pattern_sel < 2'(N_PATTERNS)) ? patterns[pattern_sel] : patterns[0];
    fp_edge = fp_sync[1] && !fp_sync[2];
    trig_any = (mode == MODE_SYNC && !trig_src_fp) ? ttc_trig : fp_edge;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fp_sync <= '0;
      ch_trig <= '0;
    end else begin
      fp_sync <= {fp_sync[1:0], fp_trig};
      for (int c = 0; c < N_CH; c++)
        ch_trig[c] <= chan_en[c] && trig_any;
    end
  end

  readout_seq #(.N_CH(N_CH)) u_ro (
    .clk, .rst_n, .start(ro_cmd), .busy(ro_busy),
    .ch_start(ch_ro_start), .ch_word, .ch_valid, .ch_ready,
    .out_word(ev_word), .out_first(ev_first), .out_last(ev_last),
    .out_valid(ev_valid), .out_ready(ev_ready)
  );

  amc13_tx u_tx (
    .clk, .rst_n, .in_word(ev_word), .in_first(ev_first), .in_last(ev_last),
    .in_valid(ev_valid), .in_ready(ev_ready), .code(amc13_code),
    .tx_byte(tx_byte_unused), .tx_k(tx_k_unused)
  );

endmodule
