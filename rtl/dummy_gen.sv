// Dummy: synthetic Rec1 hit source that can replace a link.
//
// When enabled it emits one hit every RATE cycles of the 125 MHz clock. The
// channel counts up, and the coarse time is the current state of a copy of
// the MuTRiG coarse counter LFSR that advances five steps per 125 MHz cycle
// (the MuTRiG counter runs at 625 MHz), started from the seed at reset. A
// dummy hit therefore carries the LFSR state of the 625 MHz tick at the
// start of the cycle in which it is emitted, so it passes the PRBS
// translation, lapse correction and sorting like real data. The fine time
// counts with the channel; the ASIC field is the parameter ASIC_ID, so
// those four output bits are constant by design. The paper only names this block in its figure
// of the fibre FEB; its content is this design's choice.
module dummy_gen
  import mu3e_pkg::*;
#(
  parameter logic [3:0] ASIC_ID = 4'd0,
  parameter int         RATE    = 16
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  enable,
  output logic  rec_valid,
  output rec1_t rec
);
  logic [CC_W-1:0]          lfsr;
  logic [$clog2(RATE+1)-1:0] div;
  logic [4:0]               chan;

  function automatic logic [CC_W-1:0] step5(input logic [CC_W-1:0] s);
    logic [CC_W-1:0] t;
    t = s;
    for (int i = 0; i < 5; i++) t = lfsr_next(t);
    return t;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      lfsr      <= LFSR_SEED;
      div       <= '0;
      chan      <= '0;
      rec_valid <= 1'b0;
      rec       <= '0;
    end else begin
      lfsr      <= step5(lfsr);
      rec_valid <= 1'b0;
      if (enable) begin
        if (div == $bits(div)'(RATE - 1)) begin
          div         <= '0;
          chan        <= chan + 1'b1;
          rec_valid   <= 1'b1;
          rec.asic    <= ASIC_ID;
          rec.channel <= chan;
          rec.tcc     <= lfsr;
          rec.tfine   <= chan;
          rec.eflag   <= chan[0];
        end else begin
          div <= div + 1'b1;
        end
      end
    end
  end
endmodule
