// readout_seq: sequential readout of the channel buffers by the controller.
//
// On `start` the controller reads the buffered data of the channels one after
// the other, channel 0 first, and frames them into one event for the AMC13:
//
//   {0xA, event number[11:0]}            flagged first
//   for each channel c:
//     {0xC, 9'b0, c[2:0]}                channel marker
//     the channel's frame, unchanged     (its own header, then samples)
//   {0xE, word count[11:0]}              flagged last
//
// The word count is the number of channel-frame words, modulo 4096. The
// published design specifies only that the controller reads the channels'
// buffered data sequentially and forwards it to the AMC13; the framing is this
// design's choice. A channel is asked for its data by a one-cycle pulse on
// ch_start[c], registered one cycle after its marker has been sent; its words
// are passed on with the output handshake until the word marked `last`.
// `start` while an event is in progress is ignored.
module readout_seq
  import wfd_pkg::*;
#(
  parameter int unsigned N_CH = N_CHANNELS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  // channel links
  output logic [N_CH-1:0]   ch_start,
  input  link_word_t        ch_word  [N_CH],
  input  logic [N_CH-1:0]   ch_valid,
  output logic [N_CH-1:0]   ch_ready,
  // event stream
  output logic [LINK_W-1:0] out_word,
  output logic              out_first,
  output logic              out_last,
  output logic              out_valid,
  input  logic              out_ready
);

  localparam int unsigned CHW = (N_CH > 1) ? $clog2(N_CH) : 1;

  typedef enum logic [2:0] {S_IDLE, S_HDR, S_MARK, S_FWD, S_TRL} state_t;

  state_t         state;
  logic [CHW-1:0] ch;
  logic [11:0]    evt;
  logic [11:0]    nwords;
  link_word_t     cur;

  always_comb begin
    cur       = ch_word[ch];
    out_word  = '0;
    out_first = 1'b0;
    out_last  = 1'b0;
    out_valid = 1'b0;
    ch_ready  = '0;
    unique case (state)
      S_HDR:  begin out_valid = 1'b1; out_first = 1'b1; out_word = {MARK_HEADER, evt}; end
      S_MARK: begin out_valid = 1'b1; out_word = {MARK_CHANNEL, 12'(ch)}; end
      S_FWD:  begin
        out_valid    = ch_valid[ch];
        out_word     = cur.data;
        ch_ready[ch] = out_ready;
      end
      S_TRL:  begin out_valid = 1'b1; out_last = 1'b1; out_word = {MARK_TRAILER, nwords}; end
      default: ;
    endcase
    busy = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ch       <= '0;
      evt      <= '0;
      nwords   <= '0;
      ch_start <= '0;
    end else begin
      ch_start <= '0;
      unique case (state)
        S_IDLE: if (start) begin
          ch     <= '0;
          nwords <= '0;
          state  <= S_HDR;
        end
        S_HDR: if (out_ready) state <= S_MARK;
        S_MARK: if (out_ready) begin
          ch_start[ch] <= 1'b1;
          state        <= S_FWD;
        end
        S_FWD: if (ch_valid[ch] && out_ready) begin
          nwords <= nwords + 1'b1;
          if (cur.last) begin
            if (ch == CHW'(N_CH - 1)) state <= S_TRL;
            else begin
              ch    <= ch + 1'b1;
              state <= S_MARK;
            end
          end
        end
        S_TRL: if (out_ready) begin
          evt   <= evt + 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
