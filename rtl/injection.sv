// Injection and Switch: inserts debug hits into one layer's farm stream.
//
// The transformed hits pass through unchanged (one-cycle register). A hit
// requested through `inj_req` (a position written by the host, e.g. for
// debugging or to blind the data with simulated events) is held until the
// first cycle in which the transformed stream is idle, then emitted with
// the frame number of the last hit seen, so the stream stays time-sorted.
// `inj_busy` is high while a request waits. A request arriving while one is
// pending is ignored. The paper names the injection entity and its
// purpose; when and with which time an injected hit enters is this
// design's choice.
module injection
  import mu3e_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  logic      inj_req,
  input  xyz_t      inj_pos,
  output logic      inj_busy,
  output logic [15:0] inj_cnt,
  input  logic      in_valid,
  input  farm_hit_t in_hit,
  output logic      out_valid,
  output farm_hit_t out_hit
);
  xyz_t        pend_pos;
  logic [31:0] last_ts;

  always_ff @(posedge clk) begin
    if (rst) begin
      inj_busy  <= 1'b0;
      pend_pos  <= '0;
      last_ts   <= '0;
      out_valid <= 1'b0;
      out_hit   <= '0;
      inj_cnt   <= '0;
    end else begin
      if (inj_req && !inj_busy) begin
        inj_busy <= 1'b1;
        pend_pos <= inj_pos;
      end
      out_valid <= 1'b0;
      if (in_valid) begin
        out_valid <= 1'b1;
        out_hit   <= in_hit;
        if (!in_hit.eop) last_ts <= in_hit.ts;
      end else if (inj_busy) begin
        out_valid   <= 1'b1;
        out_hit.eop <= 1'b0;
        out_hit.ts  <= last_ts;
        out_hit.pos <= pend_pos;
        inj_busy    <= 1'b0;
        inj_cnt     <= inj_cnt + 1'b1;
      end
    end
  end
endmodule
