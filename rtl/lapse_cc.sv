// Lapse CC: corrects the MuTRiG coarse counter for its 2^15-1 period.
//
// The MuTRiG counter (binary after PRBS T) wraps after 2^15-1 ticks of
// 625 MHz, the MuPix timestamp after 2^15 ticks. Because the FEB 125 MHz
// clock and the MuTRiG 625 MHz clock are both locked to the global clock
// and reset together, this block can mimic the MuTRiG counter: `cc_now`
// advances by five per 125 MHz cycle modulo 2^15-1, and every wrap of it is
// counted. Each wrap is one tick short of a 2^15 wrap, so the true count
// of 625 MHz ticks is   T = n * (2^15-1) + cc = n * 2^15 - n + cc,
// i.e. the coarse counter minus the number n of overflows, plus n * 2^15.
// The block keeps base = n * (2^15-1) modulo 5 * 2^15 and outputs
// c625 = (base + cc) mod 5 * 2^15, which divided by five is the 15-bit
// 125 MHz timestamp the MuPix uses. A hit whose counter value lies ahead of
// `cc_now` was taken before the last wrap and uses the previous base; this
// assumes hits reach this block less than one lapse (52 us) after they
// were taken. Latency: one cycle. The overflow subtraction follows the
// paper; the modulus 5 * 2^15 and the one-lapse window are this design's
// choices.
module lapse_cc
  import mu3e_pkg::*;
(
  input  logic    clk,
  input  logic    rst,        // run start: the MuTRiG counter is reset too
  input  logic    in_valid,
  input  rec1_t   in_rec,     // tcc is binary here
  output logic    out_valid,
  output rec625_t out_rec
);
  logic [CC_W-1:0]   cc_now;
  logic [C625_W-1:0] base_now, base_prev, base_hit;
  logic [C625_W:0]   sum;

  function automatic logic [C625_W-1:0] mod_add(input logic [C625_W-1:0] a, input logic [C625_W:0] b);
    logic [C625_W+1:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= (C625_W+2)'(C625_MOD)) s = s - (C625_W+2)'(C625_MOD);
    return s[C625_W-1:0];
  endfunction

  // mimic of the MuTRiG counter and of its overflows
  always_ff @(posedge clk) begin
    if (rst) begin
      cc_now    <= '0;
      base_now  <= '0;
      base_prev <= C625_W'(C625_MOD - CC_PERIOD);
    end else begin
      if ({1'b0, cc_now} + 16'd5 >= 16'(CC_PERIOD)) begin
        cc_now    <= CC_W'({1'b0, cc_now} + 16'd5 - 16'(CC_PERIOD));
        base_prev <= base_now;
        base_now  <= mod_add(base_now, (C625_W+1)'(CC_PERIOD));
      end else begin
        cc_now <= cc_now + CC_W'(5);
      end
    end
  end

  assign base_hit = (in_rec.tcc <= cc_now) ? base_now : base_prev;
  assign sum      = (C625_W+1)'(in_rec.tcc);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_rec   <= '0;
    end else begin
      out_valid       <= in_valid;
      out_rec.asic    <= in_rec.asic;
      out_rec.channel <= in_rec.channel;
      out_rec.c625    <= mod_add(base_hit, sum);
      out_rec.tfine   <= in_rec.tfine;
      out_rec.eflag   <= in_rec.eflag;
    end
  end
endmodule
