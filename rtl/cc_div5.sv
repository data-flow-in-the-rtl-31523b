// CC / 5: splits the corrected 625 MHz count into 125 MHz and 625 MHz parts.
//
// The count c625 (modulo 5 * 2^15) is divided by five: the quotient is the
// 15-bit 125 MHz timestamp shared with the MuPix, the remainder (0..4) the
// 625 MHz phase inside that 8 ns bin. Division by the constant five is left
// to synthesis. Latency: one cycle. Follows the paper.
module cc_div5
  import mu3e_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  logic    in_valid,
  input  rec625_t in_rec,
  output logic    out_valid,
  output rec125_t out_rec
);
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_rec   <= '0;
    end else begin
      out_valid       <= in_valid;
      out_rec.asic    <= in_rec.asic;
      out_rec.channel <= in_rec.channel;
      out_rec.ts      <= TS_W'(in_rec.c625 / C625_W'(5));
      out_rec.rem     <= 3'(in_rec.c625 % C625_W'(5));
      out_rec.tfine   <= in_rec.tfine;
      out_rec.eflag   <= in_rec.eflag;
    end
  end
endmodule
