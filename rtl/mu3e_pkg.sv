// Shared types and constants of the Mu3e data path.
//
// Everything that crosses a block boundary is defined here: the 34-bit
// package word exchanged between front-end board (FEB), switching board (SWB)
// and farm, the MuTRiG hit record (Rec1) and the intermediate records of the
// fibre timestamp correction chain.
//
// Package framing follows the paper: a package covers 2^11 timestamps of
// 8 ns; it opens with SOP, holds 128 sub headers (SUB) carrying the upper
// seven bits of the in-package time, hits with the lower four bits, and
// closes with EOP. The bit positions of the fields inside the 32-bit words
// and the 2-bit word kind are this design's own choices.
package mu3e_pkg;

  // 125 MHz timestamp width (MuPix counts to 2^15)
  localparam int TS_W       = 15;
  // in-package time: 7 bit SUB + 4 bit hit time = 2^11 timestamps of 8 ns
  localparam int SUB_W      = 7;
  localparam int HT_W       = 4;
  // MuTRiG coarse counter: 15-stage LFSR with period 2^15-1
  localparam int CC_W       = 15;
  localparam int CC_PERIOD  = (1 << CC_W) - 1;
  // corrected 625 MHz count, modulo 5 * 2^TS_W so that /5 gives TS_W bits
  localparam int C625_W     = 18;
  localparam int C625_MOD   = 5 * (1 << TS_W);

  typedef enum logic [1:0] {
    W_HIT = 2'd0,
    W_SOP = 2'd1,
    W_SUB = 2'd2,
    W_EOP = 2'd3
  } wkind_t;

  // one word of a data package, 32 bit payload plus kind
  typedef struct packed {
    wkind_t      kind;
    logic [31:0] data;
  } pkt_word_t;

  // hit word: time in the top four bits, the rest detector specific
  //   pixel : [31:28] time [27:19] chip [18:11] col [10:3] row [2:0] tot
  //   fibre : [31:28] time [27:24] asic [23:19] channel [18:16] 625 MHz
  //           remainder [15:11] fine time [10] energy flag [9:0] zero
  // SUB   : [6:0] upper seven bits of the in-package time
  // SOP   : [31:0] package number (timestamp above bit 11)

  // Rec1: MuTRiG hit as unpacked from the link
  typedef struct packed {
    logic [3:0]      asic;
    logic [4:0]      channel;
    logic [CC_W-1:0] tcc;     // coarse counter (LFSR state, or binary after PRBS T)
    logic [4:0]      tfine;   // 50 ps fine counter
    logic            eflag;   // energy flag
  } rec1_t;

  // hit after the lapse correction: 625 MHz count modulo C625_MOD
  typedef struct packed {
    logic [3:0]        asic;
    logic [4:0]        channel;
    logic [C625_W-1:0] c625;
    logic [4:0]        tfine;
    logic              eflag;
  } rec625_t;

  // hit after the division by five
  typedef struct packed {
    logic [3:0]      asic;
    logic [4:0]      channel;
    logic [TS_W-1:0] ts;      // 125 MHz timestamp
    logic [2:0]      rem;     // 625 MHz remainder 0..4
    logic [4:0]      tfine;
    logic            eflag;
  } rec125_t;

  // hit ready for the sorter: timestamp plus the lower 28 bits of the hit word
  typedef struct packed {
    logic [TS_W-1:0] ts;
    logic [27:0]     payload;
  } sort_hit_t;

  function automatic sort_hit_t rec125_to_sort(input rec125_t r);
    sort_hit_t s;
    s.ts      = r.ts;
    s.payload = {r.asic, r.channel, r.rem, r.tfine, r.eflag, 10'd0};
    return s;
  endfunction

  // global hit position, IEEE-754 single precision per coordinate
  typedef struct packed {
    logic [31:0] x;
    logic [31:0] y;
    logic [31:0] z;
  } xyz_t;

  // hit on the farm after the coordinate transformation; `eop` marks the end
  // of a switching-board package and carries no hit
  typedef struct packed {
    logic        eop;
    logic [31:0] ts;     // 8 ns frame number: package, SUB and hit time bits
    xyz_t        pos;
  } farm_hit_t;

  // Tag-FIFO entry: one per 8 ns frame that holds hits, or the package end
  typedef struct packed {
    logic        eop;     // last entry of the package (may carry no hits)
    logic [31:0] ts;
    logic [15:0] nhits;
    logic [15:0] nwords;  // 256-bit words of the frame in the Hit-FIFO
  } tag_t;

  // MuTRiG frame control symbols (K28.0 frame start, K28.4 frame end, K28.5 comma)
  localparam logic [7:0] K28_0 = 8'h1C;
  localparam logic [7:0] K28_4 = 8'h9C;
  localparam logic [7:0] K28_5 = 8'hBC;

  // MuTRiG coarse counter LFSR: x^15 + x^14 + 1, shifting left, XOR feedback.
  // Position 0 of the count is LFSR_SEED.
  localparam logic [CC_W-1:0] LFSR_SEED = 15'h7FFF;
  function automatic logic [CC_W-1:0] lfsr_next(input logic [CC_W-1:0] s);
    return {s[CC_W-2:0], s[14] ^ s[13]};
  endfunction

endpackage
