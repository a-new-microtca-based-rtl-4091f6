// amc13_tx: byte framing and 8b/10b encoding of the link to the AMC13.
//
// The controller FPGA sends each event to the AMC13 over the backplane's
// Fabric A link, 8b/10b encoded. This block turns the 16-bit event word stream
// into one byte per clock: K28.5 commas while idle, K27.7 before the first word
// of an event, each word as its high byte then its low byte, and K29.7 after
// the word marked `in_last`. If the next word of an event is not yet available
// a K28.5 is sent in its place. The bytes go through enc8b10b; `code` is the
// 10-bit word for the serializer, one per clock. The framing characters are
// this design's choice; the serializer itself is the FPGA's transceiver.
//
// Handshake: a word is taken (in_ready high) in the cycle its low byte is
// sent, so the stream moves at one word per two clocks at best. `tx_byte` and
// `tx_k` show the byte encoded in `code`, with the same one-clock latency.
module amc13_tx
  import wfd_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LINK_W-1:0] in_word,
  input  logic              in_first,
  input  logic              in_last,
  input  logic              in_valid,
  output logic              in_ready,
  output logic [9:0]        code,
  output logic [7:0]        tx_byte,
  output logic              tx_k
);

  typedef enum logic [1:0] {S_IDLE, S_HI, S_LO, S_EOF} state_t;

  state_t     state;
  logic [7:0] byte_c;
  logic       k_c;
  logic       rd_unused;

  always_comb begin
    in_ready = 1'b0;
    byte_c   = K28_5;
    k_c      = 1'b1;
    unique case (state)
      S_IDLE: if (in_valid) byte_c = K27_7;
      S_HI:   if (in_valid) begin byte_c = in_word[15:8]; k_c = 1'b0; end
      S_LO:   begin byte_c = in_word[7:0]; k_c = 1'b0; in_ready = 1'b1; end
      S_EOF:  byte_c = K29_7;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      tx_byte <= K28_5;
      tx_k    <= 1'b1;
    end else begin
      tx_byte <= byte_c;
      tx_k    <= k_c;
      unique case (state)
        S_IDLE: if (in_valid) state <= S_HI;
        S_HI:   if (in_valid) state <= S_LO;
        S_LO:   state <= in_last ? S_EOF : S_HI;
        S_EOF:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  enc8b10b u_enc (
    .clk, .rst_n, .en(1'b1), .data(byte_c), .is_k(k_c), .code, .rd(rd_unused)
  );

  a_first_opens: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && in_valid) |-> in_first);
  a_word_held: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_HI && in_valid) |=> in_valid && $stable(in_word) && $stable(in_last));

endmodule
