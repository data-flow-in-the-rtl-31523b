// Sorter: time-sorts the hits of the FEB and frames them into packages.
//
// Hits arrive unsorted on two inputs, each carrying a 15-bit 125 MHz
// timestamp. Memory is organised as NSLOTS time slots (one per 8 ns
// timestamp, addressed by the low timestamp bits) of SLOT_DEPTH hits, with
// a fill counter per slot. Both inputs can write in the same cycle.
// A read pointer `rt` walks the timestamps in order, DELAY cycles behind
// the FEB's own time `now`; for each slot it emits the slot's hits with the
// low four timestamp bits in the hit word, then clears the slot. Around the
// hits it writes the package framing the switching board expects:
//   SOP (package number = rt[31:11]) at every 2^11 timestamps,
//   SUB (rt[10:4]) at every 16 timestamps, i.e. all 128 per package, even
//   when no hit follows, and EOP after the last timestamp of the package.
// Two empty slots that need no header are skipped per cycle, so an idle
// reader runs faster than real time and catches up after bursts.
// A hit is written only if its timestamp lies 2 to NSLOTS-1 slots ahead of
// `rt`; later hits, and hits finding their slot full, are dropped and
// counted (`late_cnt`, `full_cnt`).
// Output: at most one word per 125 MHz cycle, no backpressure.
// The paper says only that hits are sorted in onboard memory; this
// slot memory and its sizes are this design's choices, the package framing
// is taken from the paper's switching-board description.
module feb_sorter
  import mu3e_pkg::*;
#(
  parameter int SLOT_BITS  = 10,    // 1024 slots = 8 us window
  parameter int SLOT_DEPTH = 8,     // hits per 8 ns slot
  parameter int DELAY      = 512    // read pointer lag behind `now`, cycles (4 us)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] now,          // FEB 125 MHz time since run start
  input  logic        a_valid,
  input  sort_hit_t   a_hit,
  input  logic        b_valid,
  input  sort_hit_t   b_hit,
  output logic        out_valid,
  output pkt_word_t   out_word,
  output logic [15:0] late_cnt,
  output logic [15:0] full_cnt
);
  localparam int NSLOTS = 1 << SLOT_BITS;
  localparam int DW     = $clog2(SLOT_DEPTH);
  localparam int CW     = $clog2(SLOT_DEPTH + 1);

  logic [27:0]   mem [NSLOTS * SLOT_DEPTH];
  logic [CW-1:0] cnt [NSLOTS];

  logic [31:0]   rt;
  logic [CW-1:0] idx;
  logic          sop_done, sub_done, eop_pend;

  // ---------------- write side ----------------
  logic [TS_W-1:0]      da, db;
  logic                 a_ok, b_ok, a_wr, b_wr, same;
  logic [SLOT_BITS-1:0] sa, sb;
  logic [CW-1:0]        pa, pb;

  always_comb begin
    da   = a_hit.ts - rt[TS_W-1:0];
    db   = b_hit.ts - rt[TS_W-1:0];
    a_ok = a_valid && da >= 2 && da < TS_W'(NSLOTS);
    b_ok = b_valid && db >= 2 && db < TS_W'(NSLOTS);
    sa   = a_hit.ts[SLOT_BITS-1:0];
    sb   = b_hit.ts[SLOT_BITS-1:0];
    same = a_ok && b_ok && (sa == sb);
    pa   = cnt[sa];
    pb   = same ? cnt[sb] + 1'b1 : cnt[sb];
    a_wr = a_ok && (pa < CW'(SLOT_DEPTH));
    b_wr = b_ok && (pb < CW'(SLOT_DEPTH));
  end

  // ---------------- read side ----------------
  logic                 readable, readable2;
  logic [SLOT_BITS-1:0] rs, rs1;
  logic [CW-1:0]        rcnt;
  logic                 emit_sop, emit_sub, emit_hit, emit_eop, finish, skip2;

  always_comb begin
    readable  = (now - rt) >= 32'(DELAY);
    readable2 = (now - rt) >= 32'(DELAY + 1);
    rs        = rt[SLOT_BITS-1:0];
    rs1       = rs + 1'b1;
    rcnt      = cnt[rs];
    emit_eop  = eop_pend;
    emit_sop  = !eop_pend && readable && rt[10:0] == 11'd0 && !sop_done;
    emit_sub  = !eop_pend && readable && !emit_sop && rt[3:0] == 4'd0 && !sub_done;
    emit_hit  = !eop_pend && readable && !emit_sop && !emit_sub && idx < rcnt;
    finish    = !eop_pend && readable && !emit_sop && !emit_sub &&
                (idx + 1'b1 >= rcnt);
    skip2     = finish && !emit_hit && readable2 && cnt[rs1] == '0 &&
                rt[3:0] != 4'hF && rt[10:0] != 11'h7FF;
  end

  always_ff @(posedge clk) begin
    if (a_wr) mem[{sa, pa[DW-1:0]}] <= a_hit.payload;
    if (b_wr) mem[{sb, pb[DW-1:0]}] <= b_hit.payload;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NSLOTS; i++) cnt[i] <= '0;
      rt <= '0; idx <= '0; sop_done <= 1'b0; sub_done <= 1'b0; eop_pend <= 1'b0;
      out_valid <= 1'b0; out_word <= '0; late_cnt <= '0; full_cnt <= '0;
    end else begin
      // writes; the slot being read is never written (da >= 2)
      if (same) begin
        cnt[sa] <= cnt[sa] + CW'(a_wr) + CW'(b_wr);
      end else begin
        if (a_wr) cnt[sa] <= cnt[sa] + 1'b1;
        if (b_wr) cnt[sb] <= cnt[sb] + 1'b1;
      end
      late_cnt <= late_cnt + 16'(a_valid && !a_ok) + 16'(b_valid && !b_ok);
      full_cnt <= full_cnt + 16'(a_ok && !a_wr) + 16'(b_ok && !b_wr);

      out_valid <= emit_sop | emit_sub | emit_hit | emit_eop;
      if (emit_eop) begin
        out_word <= '{kind: W_EOP, data: 32'd0};
        eop_pend <= 1'b0;
      end else if (emit_sop) begin
        out_word <= '{kind: W_SOP, data: {11'd0, rt[31:11]}};
        sop_done <= 1'b1;
      end else if (emit_sub) begin
        out_word <= '{kind: W_SUB, data: {25'd0, rt[10:4]}};
        sub_done <= 1'b1;
      end else if (emit_hit) begin
        out_word <= '{kind: W_HIT, data: {rt[3:0], mem[{rs, idx[DW-1:0]}]}};
        idx      <= idx + 1'b1;
      end
      if (finish) begin
        cnt[rs]  <= '0;
        idx      <= '0;
        sub_done <= 1'b0;
        if (rt[10:0] == 11'h7FF) begin
          eop_pend <= 1'b1;
          sop_done <= 1'b0;
        end
        rt <= skip2 ? rt + 32'd2 : rt + 32'd1;
      end
    end
  end
endmodule
