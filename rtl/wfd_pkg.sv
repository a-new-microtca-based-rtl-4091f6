// wfd_pkg: constants and types shared by the waveform digitizer logic.
//
// The digitizer has five independent channels, each a 12-bit ADC feeding its
// own acquisition FPGA and a 1-Gbit DDR3 buffer (64M x 16 words), and one
// controller FPGA that configures the channels, routes triggers, and reads the
// channels out one after another towards the AMC13 over an 8b/10b link.
// Channel count, sample width, number of stored patterns and the DDR3
// organisation follow the published design. The field widths of a pattern,
// the link word format and the TTC command codes are this design's choices.
package wfd_pkg;

  localparam int N_CHANNELS = 5;   // independent digitization channels
  localparam int SAMPLE_W   = 12;  // ADC resolution
  localparam int N_PATTERNS = 3;   // stored acquisition patterns
  localparam int DDR_ADDR_W = 26;  // 64M words in one MT41J64M16
  localparam int DDR_DATA_W = 16;  // x16 DDR3 device
  localparam int LINK_W     = 16;  // payload of one channel/AMC13 link word

  typedef logic [SAMPLE_W-1:0] sample_t;

  // Synchronous-mode acquisition pattern: n_windows windows of `length`
  // samples, with `gap` unstored samples between consecutive windows.
  typedef struct packed {
    logic [15:0] n_windows;
    logic [31:0] gap;
    logic [31:0] length;
  } acq_pattern_t;

  typedef enum logic {
    MODE_SYNC  = 1'b0,   // TTC-triggered, pattern-driven buffering
    MODE_ASYNC = 1'b1    // circular buffer, front-panel trigger
  } acq_mode_t;

  // Word on a channel-to-controller link and on the event stream.
  typedef struct packed {
    logic              first;
    logic              last;
    logic [LINK_W-1:0] data;
  } link_word_t;

  // Request side of the simple word port towards a channel's DDR3.
  typedef struct packed {
    logic                  wr;
    logic                  rd;
    logic [DDR_ADDR_W-1:0] addr;
    logic [DDR_DATA_W-1:0] wdata;
  } ddr_req_t;

  // TTC broadcast command codes understood by the controller.
  localparam logic [7:0] CMD_SEL_PAT0   = 8'h10;  // +0..+2 selects pattern 0..2
  localparam logic [7:0] CMD_READOUT    = 8'h20;
  localparam logic [7:0] CMD_MODE_SYNC  = 8'h30;
  localparam logic [7:0] CMD_MODE_ASYNC = 8'h31;
  localparam logic [7:0] CMD_CLEAR      = 8'h40;

  // Event framing markers (upper nibble of a 16-bit word).
  localparam logic [3:0] MARK_HEADER  = 4'hA;
  localparam logic [3:0] MARK_CHANNEL = 4'hC;
  localparam logic [3:0] MARK_TRAILER = 4'hE;

  // 8b/10b control characters used on the AMC13 link.
  localparam logic [7:0] K28_5 = 8'hBC;  // idle / comma
  localparam logic [7:0] K27_7 = 8'hFB;  // start of frame
  localparam logic [7:0] K29_7 = 8'hFD;  // end of frame

endpackage
