// Farm FPGA, central pixel path: four layer streams to one DMA stream.
//
// For each of the four layers (L0-L3) a coordinate transformation turns
// the switching board's 32-bit hits into 96-bit global positions, an
// injection stage can insert debug hits, and a packer stores the hits as
// 256-bit words in a Hit-FIFO with one tag per 8 ns frame in a Tag-FIFO.
// The GPU packager then multiplexes the four layers into packages of four
// sub-packages for the DMA engine (256 bit per 250 MHz cycle).
// The whole path runs on one 250 MHz clock. Inputs have no backpressure:
// `in_ready` is always high and losses are counted in the packers.
// The LUT of layer `cfg_layer` is written through the cfg port.
// The structure follows the paper's figure of the farm data path.
module farm_gpu_path
  import mu3e_pkg::*;
#(
  parameter int CHIP_W    = 9,
  parameter int HIT_DEPTH = 16384,
  parameter int TAG_DEPTH = 2048,
  parameter int MAX_REFS  = 2048
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              cfg_we,
  input  logic [1:0]        cfg_layer,
  input  logic [CHIP_W-1:0] cfg_chip,
  input  logic [3:0]        cfg_sel,
  input  logic [31:0]       cfg_data,
  input  logic [3:0]        inj_req,
  input  xyz_t              inj_pos [4],
  input  logic [3:0]        in_valid,
  output logic [3:0]        in_ready,
  input  pkt_word_t         in_word [4],
  output logic              out_valid,
  input  logic              out_ready,
  output logic [255:0]      out_data,
  output logic              out_sop,
  output logic              out_eop,
  output logic [1:0]        out_layer,
  output logic [15:0]       pkg_cnt,
  output logic [15:0]       inj_cnt [4],
  output logic [15:0]       drop_cnt [4]
);
  logic [3:0]   hv, hr, tv, tr;
  logic [255:0] hw [4];
  tag_t         tg [4];

  assign in_ready = '1;

  for (genvar l = 0; l < 4; l++) begin : g_layer
    logic      cv, iv, busy_unused;
    farm_hit_t ch, ih;

    coord_trafo #(.CHIP_W(CHIP_W)) u_trafo (
      .clk(clk), .rst(rst),
      .cfg_we(cfg_we && cfg_layer == 2'(l)), .cfg_chip(cfg_chip), .cfg_sel(cfg_sel),
      .cfg_data(cfg_data),
      .in_valid(in_valid[l]), .in_word(in_word[l]), .out_valid(cv), .out_hit(ch)
    );
    injection u_inj (
      .clk(clk), .rst(rst), .inj_req(inj_req[l]), .inj_pos(inj_pos[l]),
      .inj_busy(busy_unused), .inj_cnt(inj_cnt[l]),
      .in_valid(cv), .in_hit(ch), .out_valid(iv), .out_hit(ih)
    );
    hit_packer #(.HIT_DEPTH(HIT_DEPTH), .TAG_DEPTH(TAG_DEPTH)) u_pack (
      .clk(clk), .rst(rst), .in_valid(iv), .in_hit(ih),
      .hit_valid(hv[l]), .hit_ready(hr[l]), .hit_word(hw[l]),
      .tag_valid(tv[l]), .tag_ready(tr[l]), .tag(tg[l]), .drop_cnt(drop_cnt[l])
    );
  end

  gpu_packager #(.MAX_REFS(MAX_REFS)) u_pkgr (
    .clk(clk), .rst(rst),
    .hit_valid(hv), .hit_ready(hr), .hit_word(hw),
    .tag_valid(tv), .tag_ready(tr), .tag(tg),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .out_sop(out_sop), .out_eop(out_eop), .out_layer(out_layer), .pkg_cnt(pkg_cnt)
  );
endmodule
