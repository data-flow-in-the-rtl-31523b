// Vertical slice of the Mu3e data acquisition firmware.
//
// Three layers of the readout chain are joined here, as in the paper's
// system overview:
//   * one fibre front-end board (FEB) data path: eight MuTRiG links in,
//     two sorted package streams out (125 MHz);
//   * switching board (SWB) time alignment: one eight-to-one tree for the
//     fibre detector, fed by this FEB's two streams and six further FEB
//     streams from ports, and one eight-to-one tree per central pixel
//     layer L0-L3, fed by pixel FEB streams from ports (125 MHz in,
//     250 MHz out);
//   * the first farm FPGA's central-pixel path: coordinate transformation,
//     injection, Tag/Hit FIFOs and the GPU packager (250 MHz), ending in
//     the 256-bit stream to the DMA engine.
// The merged fibre stream leaves through a port, towards the farm's DDR
// buffer, which is not part of this design; so do the optical links, the
// pixel FEBs and the DMA engine, whose signals are ports. The SWB output
// and the farm input share the 250 MHz clock here, standing in for the
// 10 Gbit/s links between the boards.
module mu3e_daq_top
  import mu3e_pkg::*;
#(
  parameter int SLOT_BITS  = 10,
  parameter int DELAY      = 512,
  parameter int L1_DEPTH   = 8192,
  parameter int HIT_DEPTH  = 16384,
  parameter int DUMMY_RATE = 64
) (
  input  logic         clk125,
  input  logic         rst125,
  input  logic         clk250,
  input  logic         rst250,
  // fibre FEB
  input  logic [7:0]   rx_clk,
  input  logic [9:0]   rx_word [8],
  input  logic [7:0]   dummy_sel,
  output logic [7:0]   rx_locked,
  output logic         prbs_ready,
  output logic [15:0]  feb_drop_cnt,
  // fibre SWB: further FEB streams on inputs 2..7, masks
  input  logic [7:0]   fibre_mask,
  input  logic [5:0]   fibre_ext_valid,
  output logic [5:0]   fibre_ext_ready,
  input  pkt_word_t    fibre_ext_word [6],
  output logic         fibre_out_valid,
  input  logic         fibre_out_ready,
  output pkt_word_t    fibre_out_word,
  output logic         fibre_feb_overflow,   // SWB FIFO refused a FEB word
  // central pixel SWB: eight FEB streams per layer
  input  logic [7:0]   pix_mask [4],
  input  logic [7:0]   pix_valid [4],
  output logic [7:0]   pix_ready [4],
  input  pkt_word_t    pix_word [4][8],
  // farm configuration and injection
  input  logic         cfg_we,
  input  logic [1:0]   cfg_layer,
  input  logic [8:0]   cfg_chip,
  input  logic [3:0]   cfg_sel,
  input  logic [31:0]  cfg_data,
  input  logic [3:0]   inj_req,
  input  xyz_t         inj_pos [4],
  // to the DMA engine
  output logic         dma_valid,
  input  logic         dma_ready,
  output logic [255:0] dma_data,
  output logic         dma_sop,
  output logic         dma_eop,
  output logic [1:0]   dma_layer,
  output logic [15:0]  gpu_pkg_cnt,
  output logic [15:0]  inj_cnt [4],
  output logic [15:0]  farm_drop_cnt [4]
);
  // ---------------- FEB ----------------
  logic [1:0]  feb_valid;
  pkt_word_t   feb_word [2];
  logic [31:0] feb_now_unused;

  feb_scifi #(.SLOT_BITS(SLOT_BITS), .DELAY(DELAY), .DUMMY_RATE(DUMMY_RATE)) u_feb (
    .clk(clk125), .rst(rst125), .rx_clk(rx_clk), .rx_word(rx_word),
    .dummy_sel(dummy_sel), .locked(rx_locked), .prbs_ready(prbs_ready),
    .now(feb_now_unused), .out_valid(feb_valid), .out_word(feb_word),
    .drop_cnt(feb_drop_cnt)
  );

  // ---------------- SWB, fibre ----------------
  logic [7:0] f_valid, f_ready;
  pkt_word_t  f_word [8];

  always_comb begin
    f_valid = {fibre_ext_valid, feb_valid};
    f_word[0] = feb_word[0];
    f_word[1] = feb_word[1];
    for (int i = 0; i < 6; i++) f_word[2 + i] = fibre_ext_word[i];
  end
  assign fibre_ext_ready    = f_ready[7:2];
  assign fibre_feb_overflow = |(feb_valid & ~f_ready[1:0]);

  ta_tree #(.N(8), .L1_DEPTH(L1_DEPTH)) u_swb_fibre (
    .clk125(clk125), .rst125(rst125), .clk250(clk250), .rst250(rst250),
    .mask(fibre_mask), .in_valid(f_valid), .in_ready(f_ready), .in_word(f_word),
    .out_valid(fibre_out_valid), .out_ready(fibre_out_ready), .out_word(fibre_out_word)
  );

  // ---------------- SWB, central pixel layers ----------------
  logic [3:0] l_valid, l_ready;
  pkt_word_t  l_word [4];

  for (genvar l = 0; l < 4; l++) begin : g_pix
    ta_tree #(.N(8), .L1_DEPTH(L1_DEPTH)) u_swb_pix (
      .clk125(clk125), .rst125(rst125), .clk250(clk250), .rst250(rst250),
      .mask(pix_mask[l]), .in_valid(pix_valid[l]), .in_ready(pix_ready[l]),
      .in_word(pix_word[l]),
      .out_valid(l_valid[l]), .out_ready(l_ready[l]), .out_word(l_word[l])
    );
  end

  // ---------------- farm ----------------
  farm_gpu_path #(.HIT_DEPTH(HIT_DEPTH)) u_farm (
    .clk(clk250), .rst(rst250),
    .cfg_we(cfg_we), .cfg_layer(cfg_layer), .cfg_chip(cfg_chip), .cfg_sel(cfg_sel),
    .cfg_data(cfg_data), .inj_req(inj_req), .inj_pos(inj_pos),
    .in_valid(l_valid), .in_ready(l_ready), .in_word(l_word),
    .out_valid(dma_valid), .out_ready(dma_ready), .out_data(dma_data),
    .out_sop(dma_sop), .out_eop(dma_eop), .out_layer(dma_layer),
    .pkg_cnt(gpu_pkg_cnt), .inj_cnt(inj_cnt), .drop_cnt(farm_drop_cnt)
  );
endmodule
