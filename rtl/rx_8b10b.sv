// Link receiver: comma alignment and 8b/10b decoding of one MuTRiG link.
//
// The LVDS deserialiser (outside this design) delivers 10 bits per RX clock
// cycle at an arbitrary bit offset, first received bit in bit 9. The last
// two words form a 20-bit window; whenever the K28.5 comma (0011111010 or
// 1100000101) appears in it, its offset becomes the symbol boundary and
// `locked` rises. While locked, every RX clock yields one decoded byte with
// a control flag k, two cycles after the word that completes the symbol.
//
// Symbols are written abcdei fghj with a in bit 9. Decoding uses the
// standard 5b/6b and 3b/4b code tables; K28.x is the only control
// group decoded (the MuTRiG framing uses K28.0, K28.4 and K28.5). Codes
// outside the tables set `err`; running disparity is not checked.
// The paper states only that the receiver byte-aligns and 8b/10b decodes;
// the window search and the error reporting are this design's choices.
module rx_8b10b (
  input  logic       clk,        // recovered RX clock
  input  logic       rst,
  input  logic [9:0] rx_word,    // unaligned 10-bit word from the deserialiser
  output logic       locked,
  output logic       valid,
  output logic [7:0] data,
  output logic       k,
  output logic       err
);
  logic [9:0]  r0, r1;
  logic [19:0] win;
  logic [3:0]  off;
  logic [9:0]  sym;
  logic        found;
  logic [3:0]  found_off;

  assign win = {r1, r0};

  always_comb begin
    found     = 1'b0;
    found_off = '0;
    for (int i = 0; i < 10; i++) begin
      if (!found && (win[19-i -: 10] == 10'b0011111010 || win[19-i -: 10] == 10'b1100000101)) begin
        found     = 1'b1;
        found_off = 4'(i);
      end
    end
  end

  assign sym = win[19 - off -: 10];

  // 5b/6b decoding; returns {valid, k28, value}
  function automatic logic [6:0] dec6(input logic [5:0] c);
    logic [4:0] v;
    logic       ok;
    logic       kk;
    ok = 1'b1; kk = 1'b0; v = '0;
    case (c)
      6'b100111, 6'b011000: v = 5'd0;
      6'b011101, 6'b100010: v = 5'd1;
      6'b101101, 6'b010010: v = 5'd2;
      6'b110001:            v = 5'd3;
      6'b110101, 6'b001010: v = 5'd4;
      6'b101001:            v = 5'd5;
      6'b011001:            v = 5'd6;
      6'b111000, 6'b000111: v = 5'd7;
      6'b111001, 6'b000110: v = 5'd8;
      6'b100101:            v = 5'd9;
      6'b010101:            v = 5'd10;
      6'b110100:            v = 5'd11;
      6'b001101:            v = 5'd12;
      6'b101100:            v = 5'd13;
      6'b011100:            v = 5'd14;
      6'b010111, 6'b101000: v = 5'd15;
      6'b011011, 6'b100100: v = 5'd16;
      6'b100011:            v = 5'd17;
      6'b010011:            v = 5'd18;
      6'b110010:            v = 5'd19;
      6'b001011:            v = 5'd20;
      6'b101010:            v = 5'd21;
      6'b011010:            v = 5'd22;
      6'b111010, 6'b000101: v = 5'd23;
      6'b110011, 6'b001100: v = 5'd24;
      6'b100110:            v = 5'd25;
      6'b010110:            v = 5'd26;
      6'b110110, 6'b001001: v = 5'd27;
      6'b001110:            v = 5'd28;
      6'b101110, 6'b010001: v = 5'd29;
      6'b011110, 6'b100001: v = 5'd30;
      6'b101011, 6'b010100: v = 5'd31;
      6'b001111, 6'b110000: begin v = 5'd28; kk = 1'b1; end
      default:              ok = 1'b0;
    endcase
    return {ok, kk, v};
  endfunction

  // 3b/4b decoding; returns {valid, value}
  function automatic logic [3:0] dec4(input logic [3:0] c);
    logic [2:0] v;
    logic       ok;
    ok = 1'b1; v = '0;
    case (c)
      4'b1011, 4'b0100: v = 3'd0;
      4'b1001:          v = 3'd1;
      4'b0101:          v = 3'd2;
      4'b1100, 4'b0011: v = 3'd3;
      4'b1101, 4'b0010: v = 3'd4;
      4'b1010:          v = 3'd5;
      4'b0110:          v = 3'd6;
      4'b1110, 4'b0001,
      4'b0111, 4'b1000: v = 3'd7;
      default:          ok = 1'b0;
    endcase
    return {ok, v};
  endfunction

  logic [6:0] d6;
  logic [3:0] d4;
  always_comb begin
    d6 = dec6(sym[9:4]);
    // K28.y with the 110000 form carries the complemented 4b code
    d4 = dec4((sym[9:4] == 6'b110000) ? ~sym[3:0] : sym[3:0]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      r0 <= '0; r1 <= '0; off <= '0; locked <= 1'b0;
      valid <= 1'b0; data <= '0; k <= 1'b0; err <= 1'b0;
    end else begin
      r1 <= r0;
      r0 <= rx_word;
      if (found) begin
        off    <= found_off;
        locked <= 1'b1;
      end
      valid <= locked;
      data  <= {d4[2:0], d6[4:0]};
      k     <= d6[5];
      err   <= locked & ~(d6[6] & d4[3]);
    end
  end
endmodule
