// PRBS T: translates the MuTRiG coarse counter from LFSR state to binary.
//
// The MuTRiG coarse counter is a 15-stage LFSR with XOR feedback that runs
// through 2^15-1 states; this block holds a 2^15 x 15 bit lookup RAM whose
// entry at address "LFSR state" is the position of that state in the
// sequence (seed = 0). The RAM has two read ports so that the two merged
// hit streams of one half of the FEB are translated at the same time.
// After reset an initialisation walk steps the LFSR through its whole
// period and writes one entry per cycle (2^15-1 cycles); `init_done` then
// rises. Hits offered during the walk are dropped and counted.
// Latency: one cycle per port. The dual-port RAM and the translation follow
// the paper; the polynomial, seed and the self-filling walk are this
// design's choices.
module prbs_lut
  import mu3e_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  output logic        init_done,
  input  logic        a_valid,
  input  rec1_t       a_rec,
  output logic        a_out_valid,
  output rec1_t       a_out,
  input  logic        b_valid,
  input  rec1_t       b_rec,
  output logic        b_out_valid,
  output rec1_t       b_out,
  output logic [15:0] drop_cnt
);
  logic [CC_W-1:0] lut [1 << CC_W];
  logic [CC_W-1:0] wstate;
  logic [CC_W-1:0] widx;
  logic            a_hold_v, b_hold_v;
  rec1_t           a_hold, b_hold;
  logic [CC_W-1:0] a_bin, b_bin;

  // initialisation walk
  always_ff @(posedge clk) begin
    if (rst) begin
      wstate    <= LFSR_SEED;
      widx      <= '0;
      init_done <= 1'b0;
    end else if (!init_done) begin
      lut[wstate] <= widx;
      wstate      <= lfsr_next(wstate);
      widx        <= widx + 1'b1;
      if (widx == CC_W'(CC_PERIOD - 1)) init_done <= 1'b1;
    end
  end

  // two read ports
  always_ff @(posedge clk) begin
    a_bin <= lut[a_rec.tcc];
    b_bin <= lut[b_rec.tcc];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      a_hold_v <= 1'b0; b_hold_v <= 1'b0; a_hold <= '0; b_hold <= '0;
      drop_cnt <= '0;
    end else begin
      a_hold_v <= a_valid & init_done;
      b_hold_v <= b_valid & init_done;
      a_hold   <= a_rec;
      b_hold   <= b_rec;
      drop_cnt <= drop_cnt + {15'd0, a_valid && !init_done} + {15'd0, b_valid && !init_done};
    end
  end

  always_comb begin
    a_out_valid = a_hold_v;
    a_out       = a_hold;
    a_out.tcc   = a_bin;
    b_out_valid = b_hold_v;
    b_out       = b_hold;
    b_out.tcc   = b_bin;
  end
endmodule
