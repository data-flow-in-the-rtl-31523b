// Tag-FIFO and Hit-FIFO: packs one layer's hits into 256-bit words.
//
// Hits (96 bit: x, y, z) of one 8 ns frame are packed back to back into
// 256-bit words, x of the first hit in the lowest bits; eight hits fill
// exactly three words. A frame always starts on a new word, so a frame of
// n hits takes ceil(96 n / 256) words; the last one is zero-padded. When
// the frame number changes or the package ends, the frame's last word is
// flushed and its tag (frame number, number of hits, number of words)
// goes to the Tag-FIFO. An end-of-package marker closes the current frame
// with a tag whose `eop` bit is set, or writes an empty tag with `eop`
// if no frame is open. At most one word and one tag are written per cycle.
// Hits that find the Hit-FIFO full are lost and counted in `drop_cnt`; the
// tags count only the words actually stored, so the two FIFOs never
// disagree. When the Tag-FIFO is close to full (the reader is stalled for
// long), a new frame is refused as a whole and its hits counted as lost,
// always keeping room for the end-of-package tag. Both FIFOs are first-word fall-through with valid/ready reads.
// The two FIFOs, the 256-bit width and the per-frame counts follow the
// paper; the packing order and the sizes are this design's choices
// (HIT_DEPTH = 16384 words = 0.5 MB, one sub-package).
module hit_packer
  import mu3e_pkg::*;
#(
  parameter int HIT_DEPTH = 16384,
  parameter int TAG_DEPTH = 2048
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  farm_hit_t    in_hit,
  output logic         hit_valid,
  input  logic         hit_ready,
  output logic [255:0] hit_word,
  output logic         tag_valid,
  input  logic         tag_ready,
  output tag_t         tag,
  output logic [15:0]  drop_cnt
);
  logic [351:0] acc;
  logic [8:0]   acc_bits;
  logic         open;
  logic [31:0]  cur_ts;
  logic [15:0]  nhits, nwords;

  logic         w_valid, w_ready, t_valid, t_ready;
  logic [255:0] w_data;
  tag_t         t_data;
  logic [$clog2(HIT_DEPTH):0] hcnt_unused;
  logic [$clog2(TAG_DEPTH):0] tcnt;

  sync_fifo #(.W(256), .DEPTH(HIT_DEPTH)) u_hit_fifo (
    .clk(clk), .rst(rst), .wr_valid(w_valid), .wr_ready(w_ready), .wr_data(w_data),
    .rd_valid(hit_valid), .rd_ready(hit_ready), .rd_data(hit_word), .count(hcnt_unused)
  );
  sync_fifo #(.W($bits(tag_t)), .DEPTH(TAG_DEPTH)) u_tag_fifo (
    .clk(clk), .rst(rst), .wr_valid(t_valid), .wr_ready(t_ready), .wr_data(t_data),
    .rd_valid(tag_valid), .rd_ready(tag_ready), .rd_data(tag), .count(tcnt)
  );

  // what happens this cycle
  logic         new_frame, close, add;
  logic [351:0] acc_in;
  logic [8:0]   bits_in;
  logic         full_word, flush_word;
  logic         skip, skipping, starting, no_room;
  logic [31:0]  skip_ts;

  always_comb begin
    close     = in_valid && open && (in_hit.eop || in_hit.ts != cur_ts);
    new_frame = in_valid && !in_hit.eop;
    // a frame is only started if its tag is sure to find room, keeping
    // one place free for an end-of-package tag; otherwise it is dropped
    skipping  = new_frame && skip && in_hit.ts == skip_ts;
    starting  = new_frame && !skipping && (!open || in_hit.ts != cur_ts);
    no_room   = 32'(tcnt) + 32'(close) >= 32'(TAG_DEPTH - 1);
    add       = new_frame && !skipping && !(starting && no_room);
    // accumulator seen by the incoming hit (empty if a frame is closed now)
    acc_in    = close ? '0 : acc;
    bits_in   = close ? '0 : acc_bits;
    full_word = add && (bits_in + 9'd96 >= 9'd256);
    flush_word = close && (acc_bits != 0);
    w_valid   = full_word || flush_word;
    w_data    = flush_word ? acc[255:0]
                           : 256'(acc_in | (352'({in_hit.pos.z, in_hit.pos.y, in_hit.pos.x}) << bits_in));
    t_valid   = close || (in_valid && in_hit.eop && !open);
    t_data    = '{eop:    in_hit.eop,
                  ts:     open ? cur_ts : in_hit.ts,
                  nhits:  open ? nhits : 16'd0,
                  nwords: open ? nwords + 16'(flush_word && w_ready) : 16'd0};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc <= '0; acc_bits <= '0; open <= 1'b0; cur_ts <= '0;
      nhits <= '0; nwords <= '0; drop_cnt <= '0; skip <= 1'b0; skip_ts <= '0;
    end else begin
      if (in_valid && in_hit.eop) skip <= 1'b0;
      if (starting && no_room) begin
        skip    <= 1'b1;
        skip_ts <= in_hit.ts;
      end
      drop_cnt <= drop_cnt + 16'(new_frame && !add) + 16'(flush_word && !w_ready)
                           + 16'(full_word && !w_ready);
      if (close) begin
        open <= 1'b0; acc <= '0; acc_bits <= '0; nhits <= '0; nwords <= '0;
      end
      if (add) begin
        logic [351:0] a;
        a = acc_in | (352'({in_hit.pos.z, in_hit.pos.y, in_hit.pos.x}) << bits_in);
        open   <= 1'b1;
        cur_ts <= in_hit.ts;
        nhits  <= (close ? 16'd0 : nhits) + 1'b1;
        if (full_word) begin
          acc      <= a >> 256;
          acc_bits <= bits_in + 9'd96 - 9'd256;
          nwords   <= (close ? 16'd0 : nwords) + 16'(w_ready);
        end else begin
          acc      <= a;
          acc_bits <= bits_in + 9'd96;
          if (close) nwords <= '0;
        end
      end
    end
  end

  // frames are refused early enough that every tag finds room
  a_tag_space: assert property (@(posedge clk) disable iff (rst) t_valid |-> t_ready);
endmodule
