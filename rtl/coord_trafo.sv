// Coord. Trafo: local pixel address to global x, y, z in single precision.
//
// Reads one layer's time-sorted package stream from the switching board.
// SOP and SUB words update the running time; each pixel hit
// ([31:28] time [27:19] chip [18:11] col [10:3] row) gets the 32-bit frame
// number {package, SUB, time} and its global position
//     h = s + col * c + row * r
// where s is the chip's corner (row 0, column 0) and c and r its column
// and row step vectors, read from a lookup table addressed by chip ID.
// The table holds each of the nine components as a signed 32-bit fixed
// point number with 16 fractional bits (unit mm, i.e. 2^-16 mm per LSB);
// the sum is formed exactly in 42 bits and then rounded to IEEE-754 single
// precision (round to nearest, ties to even). EOP is passed on as an
// end-of-package marker. The table is written through the cfg port
// (component 0..8 = s.x s.y s.z c.x c.y c.z r.x r.y r.z).
// Latency: three cycles; one hit per cycle, no backpressure.
// The equation, the chip-ID lookup and the 3 x 32-bit float output follow
// the paper; the fixed-point table format and the hit bit layout are this
// design's choices.
module coord_trafo
  import mu3e_pkg::*;
#(
  parameter int CHIP_W = 9
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              cfg_we,
  input  logic [CHIP_W-1:0] cfg_chip,
  input  logic [3:0]        cfg_sel,
  input  logic [31:0]       cfg_data,
  input  logic              in_valid,
  input  pkt_word_t         in_word,
  output logic              out_valid,
  output farm_hit_t         out_hit
);
  localparam int NCHIP = 1 << CHIP_W;
  localparam int AW    = 42;

  logic [20:0] pkg;
  logic [6:0]  sub;

  // stage 1: lookup
  logic               v1, e1;
  logic [31:0]        t1;
  logic [7:0]         col1, row1;
  logic signed [31:0] l1 [9];

  // nine tables of NCHIP entries, one per vector component, each with one
  // write port (configuration) and one synchronous read port
  for (genvar i = 0; i < 9; i++) begin : g_lut
    logic signed [31:0] lut [NCHIP];
    always_ff @(posedge clk) begin
      if (cfg_we && cfg_sel == 4'(i)) lut[cfg_chip] <= cfg_data;
      l1[i] <= lut[in_word.data[19 +: CHIP_W]];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pkg <= '0; sub <= '0; v1 <= 1'b0; e1 <= 1'b0; t1 <= '0; col1 <= '0; row1 <= '0;
    end else begin
      v1 <= 1'b0;
      e1 <= 1'b0;
      if (in_valid) begin
        unique case (in_word.kind)
          W_SOP: begin pkg <= in_word.data[20:0]; sub <= '0; end
          W_SUB: sub <= in_word.data[6:0];
          W_EOP: begin v1 <= 1'b1; e1 <= 1'b1; t1 <= {pkg, sub, 4'hF}; end
          W_HIT: begin
            v1   <= 1'b1;
            t1   <= {pkg, sub, in_word.data[31:28]};
            col1 <= in_word.data[18:11];
            row1 <= in_word.data[10:3];
          end
        endcase
      end
    end
  end

  // stage 2: h = s + col * c + row * r, exact in 42 bits
  logic               v2, e2;
  logic [31:0]        t2;
  logic signed [AW-1:0] h2 [3];

  always_ff @(posedge clk) begin
    if (rst) begin
      v2 <= 1'b0; e2 <= 1'b0; t2 <= '0;
      for (int i = 0; i < 3; i++) h2[i] <= '0;
    end else begin
      v2 <= v1; e2 <= e1; t2 <= t1;
      for (int i = 0; i < 3; i++)
        h2[i] <= AW'(l1[i]) + AW'(l1[3+i]) * $signed({1'b0, col1})
                            + AW'(l1[6+i]) * $signed({1'b0, row1});
    end
  end

  // fixed point (16 fractional bits) to IEEE-754 single, round to nearest even
  // fixed point (16 fractional bits) to single precision: the magnitude is
  // normalised by a six-stage leading-zero shifter, then rounded to
  // nearest, ties to even
  function automatic logic [31:0] fix2float(input logic signed [AW-1:0] v);
    logic [AW-1:0] n;
    logic          s;
    logic [5:0]    lz;
    logic [23:0]   mant;
    logic          g, st;
    logic [8:0]    e;
    s  = v[AW-1];
    n  = s ? AW'(-v) : AW'(v);
    if (n == '0) return 32'd0;
    lz = '0;
    if (n[AW-1 -: 32] == '0) begin n = n << 32; lz = lz + 6'd32; end
    if (n[AW-1 -: 16] == '0) begin n = n << 16; lz = lz + 6'd16; end
    if (n[AW-1 -: 8]  == '0) begin n = n << 8;  lz = lz + 6'd8;  end
    if (n[AW-1 -: 4]  == '0) begin n = n << 4;  lz = lz + 6'd4;  end
    if (n[AW-1 -: 2]  == '0) begin n = n << 2;  lz = lz + 6'd2;  end
    if (n[AW-1]       == '0) begin n = n << 1;  lz = lz + 6'd1;  end
    mant = n[AW-1 -: 24];                         // leading one + 23 bits
    g    = n[AW-25];                              // first dropped bit
    st   = |n[AW-26:0];                           // sticky
    e    = 9'(AW - 1 + 127 - 16) - 9'(lz);
    if (g && (st || mant[0])) begin
      mant = mant + 1'b1;
      if (mant == '0) begin                       // carry out of the mantissa
        mant = 24'h800000;
        e    = e + 1'b1;
      end
    end
    return {s, e[7:0], mant[22:0]};
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_hit   <= '0;
    end else begin
      out_valid     <= v2;
      out_hit.eop   <= e2;
      out_hit.ts    <= t2;
      out_hit.pos.x <= e2 ? 32'd0 : fix2float(h2[0]);
      out_hit.pos.y <= e2 ? 32'd0 : fix2float(h2[1]);
      out_hit.pos.z <= e2 ? 32'd0 : fix2float(h2[2]);
    end
  end
endmodule
