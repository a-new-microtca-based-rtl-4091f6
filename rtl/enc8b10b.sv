// enc8b10b: 8b/10b line encoder with running disparity.
//
// The data sent to the AMC13 over the backplane link are 8b/10b encoded. This
// block implements the standard code: the low five bits EDCBA of a byte map to
// a 6-bit group abcdei and the high three bits HGF to a 4-bit group fghj, each
// group chosen from its table by the running disparity so that the line stays
// DC balanced (every code word has equal ones and zeros or differs by two, and
// the running disparity alternates). Control characters K28.0-K28.7, K23.7,
// K27.7, K29.7 and K30.7 are sent when `is_k` is set; other K codes are not
// valid and are encoded as the data byte.
//
// Interface: when `en` is high the byte is encoded and `code` is updated on
// the next clock edge; `code[9]` is bit a, sent first, `code[0]` is bit j.
// `rd` is the running disparity after the last word (0 = negative); it starts
// negative after reset. When `en` is low `code` and `rd` hold.
module enc8b10b (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic [7:0] data,
  input  logic       is_k,
  output logic [9:0] code,
  output logic       rd
);

  logic [4:0] x;   // EDCBA
  logic [2:0] y;   // HGF
  logic       k28, kx7;
  logic [5:0] c6n, c6;
  logic [3:0] c4n, c4;
  logic       rd_mid, rd_next, alt7;

  // 5b/6b code for negative running disparity, abcdei.
  function automatic logic [5:0] code6(input logic [4:0] v);
    unique case (v)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  always_comb begin
    x   = data[4:0];
    y   = data[7:5];
    k28 = is_k && (x == 5'd28);
    kx7 = is_k && (y == 3'd7) && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30);

    // 6-bit group: unbalanced codes and D.07 alternate with the disparity.
    c6n = k28 ? 6'b001111 : code6(x);
    if (rd && ($countones(c6n) != 3 || (x == 5'd7 && !k28))) c6 = ~c6n;
    else                                                     c6 = c6n;
    if      ($countones(c6) > 3) rd_mid = 1'b1;
    else if ($countones(c6) < 3) rd_mid = 1'b0;
    else                         rd_mid = rd;

    // 4-bit group.
    alt7 = kx7 || k28 ||
           (!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
           ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14));
    if (k28) begin
      unique case (y)
        3'd0: c4n = 4'b1011;  3'd1: c4n = 4'b0110;
        3'd2: c4n = 4'b1010;  3'd3: c4n = 4'b1100;
        3'd4: c4n = 4'b1101;  3'd5: c4n = 4'b0101;
        3'd6: c4n = 4'b1001;  default: c4n = 4'b0111;
      endcase
      c4 = rd_mid ? ~c4n : c4n;
    end else begin
      unique case (y)
        3'd0: c4n = 4'b1011;  3'd1: c4n = 4'b1001;
        3'd2: c4n = 4'b0101;  3'd3: c4n = 4'b1100;
        3'd4: c4n = 4'b1101;  3'd5: c4n = 4'b1010;
        3'd6: c4n = 4'b0110;  default: c4n = alt7 ? 4'b0111 : 4'b1110;
      endcase
      if (rd_mid && ($countones(c4n) != 2 || y == 3'd3)) c4 = ~c4n;
      else                                                c4 = c4n;
    end
    if      ($countones(c4) > 2) rd_next = 1'b1;
    else if ($countones(c4) < 2) rd_next = 1'b0;
    else                         rd_next = rd_mid;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      code <= 10'b0;
      rd   <= 1'b0;
    end else if (en) begin
      code <= {c6, c4};
      rd   <= rd_next;
    end
  end

endmodule
