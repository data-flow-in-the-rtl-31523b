// Single-clock FIFO with first-word fall-through output.
//
// Used wherever the data path buffers a stream in one clock domain. The
// write side is a valid/ready pair (ready = not full), the read side shows
// the head word on rd_data whenever rd_valid is high and removes it on
// rd_ready. Depth is a power of two; the storage is a plain array so a
// synthesis tool can map it to block RAM. `count` reports the fill level.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_valid,
  output logic                     wr_ready,
  input  logic [W-1:0]             wr_data,
  output logic                     rd_valid,
  input  logic                     rd_ready,
  output logic [W-1:0]             rd_data,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wp, rp;

  assign wr_ready = (count != DEPTH[AW:0]);
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rp[AW-1:0]];
  assign count    = wp - rp;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_valid && wr_ready) begin
        mem[wp[AW-1:0]] <= wr_data;
        wp <= wp + 1'b1;
      end
      if (rd_valid && rd_ready) rp <= rp + 1'b1;
    end
  end
endmodule
