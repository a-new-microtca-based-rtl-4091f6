// chan_ctrl: acquisition logic of one digitizer channel (one channel FPGA).
//
// Each of the five channels has its own FPGA between its ADC and its DDR3
// buffer. In synchronous mode a trigger starts the pattern sequencer, which
// passes the samples of the selected pattern's windows to the buffer. In
// asynchronous mode every sample goes into a circular memory, and a trigger
// copies a window of `pre` samples before and `post` samples from the trigger
// into the buffer. The buffer controller writes the chosen samples to the
// DDR3 and, on `ro_start`, sends them to the controller FPGA over the channel
// link. The two modes and their behaviour follow the published design; the
// block structure and all timing are this design's.
//
// `mode` steers the trigger to one of the two acquisition paths and selects
// which path feeds the buffer. Both paths run on the sample clock, one sample
// per clock. The trigger arrives already gated by the controller's channel
// enable. Latency from trigger to first stored sample: 1 cycle (synchronous
// mode, sample of the next cycle) or 2 cycles (asynchronous mode, oldest
// pre-trigger sample); the buffer adds its FIFO latency before the memory.
module chan_ctrl
  import wfd_pkg::*;
#(
  parameter int unsigned ADDR_W     = DDR_ADDR_W,
  parameter int unsigned CIRC_DEPTH = 4096,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  sample_t               adc_sample,
  input  logic                  trig,
  input  acq_mode_t             mode,
  input  acq_pattern_t          pattern,
  input  logic [15:0]           pre,
  input  logic [31:0]           post,
  input  logic                  ro_start,
  input  logic                  clear,
  // DDR3 word port
  output ddr_req_t              mem_req,
  input  logic                  mem_wr_ready,
  input  logic                  mem_rd_ready,
  input  logic                  mem_rd_valid,
  input  logic [DDR_DATA_W-1:0] mem_rd_data,
  // link to the controller FPGA
  output link_word_t            link,
  output logic                  link_valid,
  input  logic                  link_ready,
  // status
  output logic                  acq_busy,
  output logic                  ro_busy,
  output logic                  overflow,
  output logic                  trig_lost
);

  logic    seq_trig, seq_valid, seq_busy, seq_lost;
  logic    cb_trig, cb_valid, cb_busy, cb_lost;
  sample_t seq_data, cb_data;
  logic    buf_valid;
  sample_t buf_data;
  logic [ADDR_W:0] stored_unused;

  always_comb begin
    seq_trig  = trig && (mode == MODE_SYNC);
    cb_trig   = trig && (mode == MODE_ASYNC);
    buf_valid = (mode == MODE_SYNC) ? seq_valid : cb_valid;
    buf_data  = (mode == MODE_SYNC) ? seq_data  : cb_data;
    acq_busy  = seq_busy || cb_busy;
    trig_lost = seq_lost || cb_lost;
  end

  acq_pattern_seq u_seq (
    .clk, .rst_n, .trig(seq_trig), .pattern, .adc_sample,
    .out_valid(seq_valid), .out_data(seq_data), .busy(seq_busy), .trig_lost(seq_lost)
  );

  circ_buffer #(.DEPTH(CIRC_DEPTH)) u_circ (
    .clk, .rst_n, .adc_sample, .trig(cb_trig), .pre, .post,
    .out_valid(cb_valid), .out_data(cb_data), .busy(cb_busy), .trig_lost(cb_lost)
  );

  buffer_ctrl #(.ADDR_W(ADDR_W), .FIFO_DEPTH(FIFO_DEPTH)) u_buf (
    .clk, .rst_n, .in_valid(buf_valid), .in_data(buf_data), .ro_start, .clear,
    .mem_req, .mem_wr_ready, .mem_rd_ready, .mem_rd_valid, .mem_rd_data,
    .link, .link_valid, .link_ready, .busy(ro_busy), .overflow, .stored(stored_unused)
  );

endmodule
