// Time alignment node: merges two time-sorted package streams into one.
//
// Both inputs and the output carry package words (SOP, SUB, hits, EOP).
// The node waits until both input heads are present, then:
//   SOP on both          -> one SOP, both popped (packages start together)
//   SUB on both          -> one SUB, both popped (the same SUB is expected;
//                           should they differ, the lower one goes first)
//   EOP on both          -> one EOP, both popped
//   hit on both          -> the hit with the lower 4-bit time goes first
//                           (input a on a tie)
//   hit against SUB/EOP  -> the hit goes first: the other stream has
//                           finished this sub-header period
//   SUB against EOP, or anything against SOP -> the word that is not the
//                           later marker goes first
// Since every package contains all 128 SUBs, only the four time bits of
// the hits are compared. A masked input is treated as absent: the node
// then passes the other input straight through, and the node's own
// output reports masked when both inputs are.
// Output register with valid/ready; one word per cycle.
// The comparison rules follow the paper's tree description and its figure
// (including "mask"); the tie and mismatch rules are this design's choices.
module ta_merge
  import mu3e_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  logic      a_mask,
  input  logic      b_mask,
  input  logic      a_valid,
  output logic      a_ready,
  input  pkt_word_t a_word,
  input  logic      b_valid,
  output logic      b_ready,
  input  pkt_word_t b_word,
  output logic      out_mask,
  output logic      out_valid,
  input  logic      out_ready,
  output pkt_word_t out_word
);
  logic      space;
  logic      take_a, take_b;
  pkt_word_t sel;

  assign space    = !out_valid || out_ready;
  assign out_mask = a_mask & b_mask;

  always_comb begin
    take_a = 1'b0;
    take_b = 1'b0;
    sel    = a_word;
    if (a_mask && b_mask) begin
      // nothing to do
    end else if (b_mask) begin
      take_a = a_valid;
    end else if (a_mask) begin
      take_b = b_valid;
      sel    = b_word;
    end else if (a_valid && b_valid) begin
      unique case ({a_word.kind, b_word.kind})
        {W_SOP, W_SOP}, {W_EOP, W_EOP}: begin take_a = 1'b1; take_b = 1'b1; end
        {W_SUB, W_SUB}: begin
          if (a_word.data[SUB_W-1:0] == b_word.data[SUB_W-1:0]) begin
            take_a = 1'b1; take_b = 1'b1;
          end else if (a_word.data[SUB_W-1:0] < b_word.data[SUB_W-1:0]) begin
            take_a = 1'b1;
          end else begin
            take_b = 1'b1;
          end
        end
        {W_HIT, W_HIT}: begin
          if (b_word.data[31:28] < a_word.data[31:28]) take_b = 1'b1;
          else                                         take_a = 1'b1;
        end
        {W_HIT, W_SUB}, {W_HIT, W_EOP}, {W_HIT, W_SOP},
        {W_SUB, W_EOP}, {W_SUB, W_SOP}, {W_EOP, W_SOP}: take_a = 1'b1;
        default: take_b = 1'b1;   // the mirrored cases
      endcase
      if (take_b && !take_a) sel = b_word;
    end
  end

  assign a_ready = space && take_a;
  assign b_ready = space && take_b;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_word  <= '0;
    end else if (space) begin
      out_valid <= take_a || take_b;
      out_word  <= sel;
    end
  end

  // equal SUBs are expected on both sides of an unmasked node
  property p_sub_match;
    @(posedge clk) disable iff (rst)
      (!a_mask && !b_mask && a_valid && b_valid && space &&
       a_word.kind == W_SUB && b_word.kind == W_SUB) |->
      (a_word.data[SUB_W-1:0] == b_word.data[SUB_W-1:0]);
  endproperty
  a_sub_match: assert property (p_sub_match);
endmodule
