// Time alignment tree of the switching board: N package streams to one.
//
// Each input (one FEB link, 125 MHz) enters a layer-1 dual-clock FIFO whose
// read side runs at 250 MHz; from there on the tree is a binary tree of
// merge nodes (log2 N layers), each followed by a FIFO of NODE_DEPTH words.
// The root FIFO drives the output. With N = 8 the output can carry two
// words per 125 MHz cycle against eight at the input, the 4:1 bottleneck
// the paper discusses; the layer-1 FIFOs absorb bursts and their
// `in_ready` lets a sender apply backpressure.
// Streams are numbered heap-like: leaves 0..N-1, node k merges streams 2k
// and 2k+1 into stream N+k, the root is stream 2N-2. `mask[i]` disables
// input i (an unused or broken link).
// Tree shape, clock change and the first-layer FIFO of one package
// (32 kB = 8192 words) follow the paper; NODE_DEPTH is this design's
// choice.
module ta_tree
  import mu3e_pkg::*;
#(
  parameter int N          = 8,
  parameter int L1_DEPTH   = 8192,
  parameter int NODE_DEPTH = 16
) (
  input  logic          clk125,
  input  logic          rst125,
  input  logic          clk250,
  input  logic          rst250,
  input  logic [N-1:0]  mask,
  input  logic [N-1:0]  in_valid,
  output logic [N-1:0]  in_ready,
  input  pkt_word_t     in_word [N],
  output logic          out_valid,
  input  logic          out_ready,
  output pkt_word_t     out_word
);
  localparam int NS = 2 * N - 1;
  localparam int WW = $bits(pkt_word_t);

  logic [NS-1:0] s_valid, s_ready, s_mask;
  pkt_word_t     s_word [NS];

  for (genvar i = 0; i < N; i++) begin : g_leaf
    async_fifo #(.W(WW), .DEPTH(L1_DEPTH)) u_l1 (
      .wr_clk(clk125), .wr_rst(rst125), .wr_valid(in_valid[i]), .wr_ready(in_ready[i]),
      .wr_data(in_word[i]),
      .rd_clk(clk250), .rd_rst(rst250), .rd_valid(s_valid[i]), .rd_ready(s_ready[i]),
      .rd_data(s_word[i])
    );
    assign s_mask[i] = mask[i];
  end

  for (genvar k = 0; k < N - 1; k++) begin : g_node
    logic      m_valid, m_ready;
    pkt_word_t m_word;
    logic [$clog2(NODE_DEPTH):0] cnt_unused;

    ta_merge u_merge (
      .clk(clk250), .rst(rst250),
      .a_mask(s_mask[2*k]), .b_mask(s_mask[2*k+1]),
      .a_valid(s_valid[2*k]),   .a_ready(s_ready[2*k]),   .a_word(s_word[2*k]),
      .b_valid(s_valid[2*k+1]), .b_ready(s_ready[2*k+1]), .b_word(s_word[2*k+1]),
      .out_mask(s_mask[N+k]), .out_valid(m_valid), .out_ready(m_ready), .out_word(m_word)
    );
    sync_fifo #(.W(WW), .DEPTH(NODE_DEPTH)) u_fifo (
      .clk(clk250), .rst(rst250), .wr_valid(m_valid), .wr_ready(m_ready), .wr_data(m_word),
      .rd_valid(s_valid[N+k]), .rd_ready(s_ready[N+k]), .rd_data(s_word[N+k]),
      .count(cnt_unused)
    );
  end

  assign out_valid       = s_valid[NS-1];
  assign out_word        = s_word[NS-1];
  assign s_ready[NS-1]   = out_ready;
endmodule
