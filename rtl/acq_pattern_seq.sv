// acq_pattern_seq: synchronous-mode acquisition pattern of one channel.
//
// When a trigger arrives, the sequencer passes the ADC samples of a regular
// pattern to the channel buffer: `n_windows` sampling windows of `length`
// samples each, separated by `gap` samples that are not stored. The window
// count, gap and window length are the three quantities the published design
// keeps per pattern in configuration registers; which of the stored patterns
// applies is chosen outside this block and arrives on `pattern`.
//
// Timing (this design's choice): the pattern is latched on the trigger cycle
// and the first stored sample is the one on `adc_sample` in the next cycle.
// Window k (from 0) then covers samples k*(length+gap) .. k*(length+gap)+length-1
// counted from that cycle. Outputs are combinational from the state, so a
// sample is stored in the cycle it is presented. A trigger during a pattern is
// not queued: it is dropped and flagged on `trig_lost` for one cycle. A pattern
// with zero windows or zero length stores nothing.
module acq_pattern_seq
  import wfd_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         trig,
  input  acq_pattern_t pattern,
  input  sample_t      adc_sample,
  output logic         out_valid,
  output sample_t      out_data,
  output logic         busy,
  output logic         trig_lost
);

  typedef enum logic [1:0] {S_IDLE, S_WIN, S_GAP} state_t;

  state_t       state;
  acq_pattern_t pat;
  logic [31:0]  cnt;       // samples left in the current window or gap
  logic [15:0]  win_left;  // windows left after the current one

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pat      <= '0;
      cnt      <= '0;
      win_left <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (trig && pattern.n_windows != 0 && pattern.length != 0) begin
          pat      <= pattern;
          cnt      <= pattern.length - 1;
          win_left <= pattern.n_windows - 1;
          state    <= S_WIN;
        end
        S_WIN: begin
          if (cnt != 0) begin
            cnt <= cnt - 1;
          end else if (win_left == 0) begin
            state <= S_IDLE;
          end else if (pat.gap == 0) begin
            cnt      <= pat.length - 1;
            win_left <= win_left - 1;
          end else begin
            cnt   <= pat.gap - 1;
            state <= S_GAP;
          end
        end
        S_GAP: begin
          if (cnt != 0) begin
            cnt <= cnt - 1;
          end else begin
            cnt      <= pat.length - 1;
            win_left <= win_left - 1;
            state    <= S_WIN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    out_valid = (state == S_WIN);
    out_data  = adc_sample;
    busy      = (state != S_IDLE);
    trig_lost = trig && busy;
  end

endmodule
