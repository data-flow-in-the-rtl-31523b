// Dual-clock FIFO with Gray-coded pointers and first-word fall-through read.
//
// Crosses a stream from the write clock (e.g. the recovered RX clock or the
// 125 MHz FEB clock) to the read clock (125 MHz, or 250 MHz in the SWB time
// alignment tree). Each pointer is passed to the other domain as Gray code
// through two flip-flops, so full and empty are pessimistic by two cycles
// of the other clock. Depth is a power of two. Each side has its own
// synchronous reset; both must be asserted together at start-up.
module async_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 16
) (
  input  logic          wr_clk,
  input  logic          wr_rst,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_clk,
  input  logic          rd_rst,
  output logic          rd_valid,
  input  logic          rd_ready,
  output logic [W-1:0]  rd_data
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];

  logic [AW:0] wp_bin, wp_gray, rp_bin, rp_gray;
  logic [AW:0] rp_gray_w1, rp_gray_w2, wp_gray_r1, wp_gray_r2;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // full: write pointer one lap ahead of the synchronised read pointer
  assign wr_ready = (wp_gray != {~rp_gray_w2[AW:AW-1], rp_gray_w2[AW-2:0]});
  assign rd_valid = (rp_gray != wp_gray_r2);
  assign rd_data  = mem[rp_bin[AW-1:0]];

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wp_bin <= '0; wp_gray <= '0; rp_gray_w1 <= '0; rp_gray_w2 <= '0;
    end else begin
      rp_gray_w1 <= rp_gray;
      rp_gray_w2 <= rp_gray_w1;
      if (wr_valid && wr_ready) begin
        mem[wp_bin[AW-1:0]] <= wr_data;
        wp_bin  <= wp_bin + 1'b1;
        wp_gray <= bin2gray(wp_bin + 1'b1);
      end
    end
  end

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rp_bin <= '0; rp_gray <= '0; wp_gray_r1 <= '0; wp_gray_r2 <= '0;
    end else begin
      wp_gray_r1 <= wp_gray;
      wp_gray_r2 <= wp_gray_r1;
      if (rd_valid && rd_ready) begin
        rp_bin  <= rp_bin + 1'b1;
        rp_gray <= bin2gray(rp_bin + 1'b1);
      end
    end
  end
endmodule
