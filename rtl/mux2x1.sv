// MUX 2x1: merges the Rec1 streams of two links into one.
//
// Both inputs are first-word fall-through FIFO outputs (valid/ready). Each
// cycle at most one record is taken; when both inputs hold one, the input
// that was not served last time wins (round robin), so each link gets at
// least half of the output rate. The output is registered and has no
// backpressure: one record per 125 MHz cycle at most. The paper says only
// that the links are merged in groups of two; the arbitration is this
// design's choice.
module mux2x1
  import mu3e_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  a_valid,
  output logic  a_ready,
  input  rec1_t a_rec,
  input  logic  b_valid,
  output logic  b_ready,
  input  rec1_t b_rec,
  output logic  out_valid,
  output rec1_t out_rec
);
  logic last_b;   // last grant went to input b

  always_comb begin
    a_ready = 1'b0;
    b_ready = 1'b0;
    if (a_valid && b_valid) begin
      if (last_b) a_ready = 1'b1;
      else        b_ready = 1'b1;
    end else begin
      a_ready = a_valid;
      b_ready = b_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      last_b    <= 1'b1;
      out_valid <= 1'b0;
      out_rec   <= '0;
    end else begin
      out_valid <= a_ready | b_ready;
      if (a_ready) begin
        out_rec <= a_rec;
        last_b  <= 1'b0;
      end else if (b_ready) begin
        out_rec <= b_rec;
        last_b  <= 1'b1;
      end
    end
  end
endmodule
