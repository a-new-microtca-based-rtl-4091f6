// ttc_cmd_decoder: acts on TTC broadcast control commands.
//
// The experiment distributes control commands with its triggers over TTC. In
// the published design these commands choose which of the stored acquisition
// patterns applies to the following triggers, switch between the synchronous
// (pattern) and asynchronous (circular buffer) operation modes, and start the
// readout of the buffered data. This block takes the already recovered 8-bit
// command with a valid strobe (the TTC line decoding happens upstream) and
// keeps the pattern selection and mode in registers. The command codes come
// from wfd_pkg and are this design's choice; CMD_CLEAR, which discards the
// channel buffers, is an addition of this design.
//
// Timing: a command on cycle t changes `pattern_sel`/`mode` from cycle t+1;
// `readout_start` and `clear` are one-cycle pulses in cycle t+1. Unknown codes
// are ignored. Reset gives pattern 0 and synchronous mode.
module ttc_cmd_decoder
  import wfd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  input  logic [7:0] cmd,
  output logic [1:0] pattern_sel,
  output acq_mode_t  mode,
  output logic       readout_start,
  output logic       clear
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pattern_sel   <= '0;
      mode          <= MODE_SYNC;
      readout_start <= 1'b0;
      clear         <= 1'b0;
    end else begin
      readout_start <= 1'b0;
      clear         <= 1'b0;
      if (cmd_valid) begin
        if (cmd >= CMD_SEL_PAT0 && cmd < CMD_SEL_PAT0 + 8'(N_PATTERNS))
          pattern_sel <= 2'(cmd - CMD_SEL_PAT0);
        else if (cmd == CMD_READOUT)    readout_start <= 1'b1;
        else if (cmd == CMD_MODE_SYNC)  mode <= MODE_SYNC;
        else if (cmd == CMD_MODE_ASYNC) mode <= MODE_ASYNC;
        else if (cmd == CMD_CLEAR)      clear <= 1'b1;
      end
    end
  end

endmodule
