// MUX 4x1: builds the GPU package from the four layers' Tag and Hit FIFOs.
//
// One package covers one switching-board package (2^11 frames of 8 ns)
// and consists of four sub-packages, layer 0 to layer 3, each laid out as
//   hit words   : the layer's 256-bit hit words of all frames, in time order
//   references  : one 64-bit entry per frame with hits,
//                 [31:0] frame number [47:32] word offset of the frame's
//                 first hit word [63:48] number of hits; four per word,
//                 the first in the lowest bits, unused entries zero
//   trailer     : [255:224] 0x4D553345 [223:216] layer [215:200] number of
//                 hit words [199:184] number of references
// The references at the end of each sub-package let the GPU cut time
// frames of any multiple of 8 ns, overlapping ones included, without
// copying hits. The block works through layer 0's tags until the tag marked
// end-of-package, copying each frame's words from the Hit-FIFO, then writes
// the references and the trailer, then goes on with layer 1, and so on.
// Output: a 256-bit valid/ready stream to the DMA engine, `out_sop` on the
// first and `out_eop` on the last word of a package, one word per cycle.
// Multiplexing the layers into one package with per-layer sub-packages and
// references at their end follows the paper. The reference and trailer
// formats, and one package per switching-board package instead of a fixed
// 2 MB (0.5 MB per layer is the upper bound here), are this design's
// choices.
module gpu_packager
  import mu3e_pkg::*;
#(
  parameter int MAX_REFS = 2048
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [3:0]   hit_valid,
  output logic [3:0]   hit_ready,
  input  logic [255:0] hit_word [4],
  input  logic [3:0]   tag_valid,
  output logic [3:0]   tag_ready,
  input  tag_t         tag [4],
  output logic         out_valid,
  input  logic         out_ready,
  output logic [255:0] out_data,
  output logic         out_sop,
  output logic         out_eop,
  output logic [1:0]   out_layer,
  output logic [15:0]  pkg_cnt
);
  localparam int RW = $clog2(MAX_REFS + 1);
  localparam int RA = $clog2(MAX_REFS);

  typedef enum logic [1:0] {S_TAG, S_HITS, S_REFS, S_TRAIL} state_t;
  state_t      state;
  logic [1:0]  layer;
  logic [15:0] remaining, woff;
  logic [RW-1:0] nrefs, rword;
  logic        last_tag, first;
  logic [63:0] refs [MAX_REFS];

  logic        space;
  assign space = !out_valid || out_ready;

  logic        emit;
  logic [255:0] word;
  logic        pop_tag, pop_hit;

  always_comb begin
    emit    = 1'b0;
    word    = '0;
    pop_tag = 1'b0;
    pop_hit = 1'b0;
    unique case (state)
      S_TAG:   pop_tag = tag_valid[layer];
      S_HITS:  begin
        pop_hit = space && hit_valid[layer];
        emit    = pop_hit;
        word    = hit_word[layer];
      end
      S_REFS:  begin
        emit = space;
        for (int i = 0; i < 4; i++)
          if (32'(rword) * 4 + i < 32'(nrefs))
            word[64*i +: 64] = refs[RA'(32'(rword) * 4 + i)];
      end
      S_TRAIL: begin
        emit = space;
        word = {32'h4D553345, 6'd0, layer, woff, 16'(nrefs), 184'd0};
      end
    endcase
  end

  always_comb begin
    hit_ready = '0;
    tag_ready = '0;
    hit_ready[layer] = pop_hit;
    tag_ready[layer] = pop_tag;
  end

  always_ff @(posedge clk) begin
    if (pop_tag && (tag[layer].nhits != 0) && nrefs < RW'(MAX_REFS))
      refs[nrefs[RA-1:0]] <= {tag[layer].nhits, woff, tag[layer].ts};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_TAG; layer <= '0; remaining <= '0; woff <= '0; nrefs <= '0;
      rword <= '0; last_tag <= 1'b0; first <= 1'b1;
      out_valid <= 1'b0; out_data <= '0; out_sop <= 1'b0; out_eop <= 1'b0;
      out_layer <= '0; pkg_cnt <= '0;
    end else begin
      if (space) out_valid <= emit;
      if (emit) begin
        out_data  <= word;
        out_sop   <= first;
        out_eop   <= (state == S_TRAIL) && (layer == 2'd3);
        out_layer <= layer;
        first     <= 1'b0;
      end
      unique case (state)
        S_TAG: if (pop_tag) begin
          if (tag[layer].nhits != 0 && nrefs < RW'(MAX_REFS)) nrefs <= nrefs + 1'b1;
          remaining <= tag[layer].nwords;
          last_tag  <= tag[layer].eop;
          if (tag[layer].nwords != 0) state <= S_HITS;
          else if (tag[layer].eop)    state <= (nrefs != 0) ? S_REFS : S_TRAIL;
        end
        S_HITS: if (pop_hit) begin
          remaining <= remaining - 1'b1;
          woff      <= woff + 1'b1;
          if (remaining == 16'd1) state <= last_tag ? S_REFS : S_TAG;
        end
        S_REFS: if (space) begin
          if ((32'(rword) + 1) * 4 >= 32'(nrefs)) state <= S_TRAIL;
          rword <= rword + 1'b1;
        end
        S_TRAIL: if (space) begin
          state <= S_TAG;
          layer <= layer + 1'b1;
          woff  <= '0; nrefs <= '0; rword <= '0;
          if (layer == 2'd3) begin
            first   <= 1'b1;
            pkg_cnt <= pkg_cnt + 1'b1;
          end
        end
      endcase
    end
  end
endmodule
