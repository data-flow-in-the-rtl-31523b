// Fibre front-end board data path: eight MuTRiG links to two sorted streams.
//
// Per link (8x): the receiver aligns and 8b/10b-decodes the link in its own
// RX clock domain, a dual-clock FIFO moves the bytes to the 125 MHz FEB
// clock, the unpacker forms Rec1 hits, a switch selects either these or the
// dummy generator, and a FIFO buffers the selected hits.
// Per half (2x): two MUX 2x1 merge the four links of the half into two
// streams; one dual-port PRBS T RAM translates both coarse counters; a
// lapse correction and a divide-by-five per stream give the 125 MHz
// timestamp; the sorter merges both streams, sorts them by timestamp and
// frames them into packages. Half h carries links 4h..4h+3 and drives
// output stream h (one optical link to the switching board each).
// `now` counts 125 MHz cycles since reset; reset is the run start and
// must also reset the MuTRiG counters. The block structure follows the
// paper's figure of the fibre FEB; FIFO depths and the link-to-half
// assignment are this design's choices.
module feb_scifi
  import mu3e_pkg::*;
#(
  parameter int NLINKS     = 8,
  parameter int SLOT_BITS  = 10,
  parameter int SLOT_DEPTH = 8,
  parameter int DELAY      = 512,
  parameter int DUMMY_RATE = 64
) (
  input  logic                clk,          // 125 MHz FEB clock
  input  logic                rst,
  input  logic [NLINKS-1:0]   rx_clk,
  input  logic [9:0]          rx_word [NLINKS],
  input  logic [NLINKS-1:0]   dummy_sel,    // Switch: 1 = dummy generator
  output logic [NLINKS-1:0]   locked,
  output logic                prbs_ready,
  output logic [31:0]         now,
  output logic [1:0]          out_valid,
  output pkt_word_t           out_word [2],
  output logic [15:0]         drop_cnt      // hits lost anywhere before the sorter
);
  localparam int NHALF = 2;
  localparam int LPH   = NLINKS / NHALF;    // links per half (4)

  logic [NLINKS-1:0] fv, fr, uv, dv, sv, qv, qr;
  logic [9:0]        fd  [NLINKS];
  rec1_t             ur  [NLINKS];
  rec1_t             dr  [NLINKS];
  rec1_t             sr  [NLINKS];
  rec1_t             qd  [NLINKS];
  logic [15:0]       udrop [NLINKS];
  logic [NLINKS-1:0] fifo_full_drop;

  always_ff @(posedge clk) begin
    if (rst) now <= '0;
    else     now <= now + 1'b1;
  end

  for (genvar l = 0; l < NLINKS; l++) begin : g_link
    logic       rv, rk, re;
    logic [7:0] rd;
    logic       wr_ready_unused;

    rx_8b10b u_rx (
      .clk(rx_clk[l]), .rst(rst), .rx_word(rx_word[l]), .locked(locked[l]),
      .valid(rv), .data(rd), .k(rk), .err(re)
    );
    async_fifo #(.W(10), .DEPTH(16)) u_rxfifo (
      .wr_clk(rx_clk[l]), .wr_rst(rst), .wr_valid(rv), .wr_ready(wr_ready_unused),
      .wr_data({re, rk, rd}),
      .rd_clk(clk), .rd_rst(rst), .rd_valid(fv[l]), .rd_ready(fr[l]), .rd_data(fd[l])
    );
    assign fr[l] = 1'b1;

    mutrig_unpacker #(.ASIC_ID(4'(l))) u_unp (
      .clk(clk), .rst(rst), .in_valid(fv[l]), .in_data(fd[l][7:0]), .in_k(fd[l][8]),
      .in_err(fd[l][9]), .rec_valid(uv[l]), .rec(ur[l]), .drop_cnt(udrop[l])
    );
    dummy_gen #(.ASIC_ID(4'(l)), .RATE(DUMMY_RATE)) u_dummy (
      .clk(clk), .rst(rst), .enable(dummy_sel[l]), .rec_valid(dv[l]), .rec(dr[l])
    );
    // Switch
    assign sv[l] = dummy_sel[l] ? dv[l] : uv[l];
    assign sr[l] = dummy_sel[l] ? dr[l] : ur[l];

    logic                  sw_ready;
    logic [$clog2(16):0]   cnt_unused;
    sync_fifo #(.W($bits(rec1_t)), .DEPTH(16)) u_recfifo (
      .clk(clk), .rst(rst), .wr_valid(sv[l]), .wr_ready(sw_ready), .wr_data(sr[l]),
      .rd_valid(qv[l]), .rd_ready(qr[l]), .rd_data(qd[l]), .count(cnt_unused)
    );
    assign fifo_full_drop[l] = sv[l] & ~sw_ready;
  end

  logic [1:0] hv [NHALF];
  rec1_t      hr [NHALF][2];
  logic [NHALF-1:0] pinit;
  logic [15:0] pdrop [NHALF];
  logic [15:0] late  [NHALF];
  logic [15:0] full  [NHALF];

  for (genvar h = 0; h < NHALF; h++) begin : g_half
    logic [1:0] mv, pv, lv, cv;
    rec1_t      mr [2];
    rec1_t      pr [2];
    rec625_t    lr [2];
    rec125_t    cr [2];

    for (genvar m = 0; m < 2; m++) begin : g_mux
      localparam int A = h * LPH + 2 * m;
      mux2x1 u_mux (
        .clk(clk), .rst(rst),
        .a_valid(qv[A]),     .a_ready(qr[A]),     .a_rec(qd[A]),
        .b_valid(qv[A + 1]), .b_ready(qr[A + 1]), .b_rec(qd[A + 1]),
        .out_valid(mv[m]), .out_rec(mr[m])
      );
    end

    prbs_lut u_prbs (
      .clk(clk), .rst(rst), .init_done(pinit[h]),
      .a_valid(mv[0]), .a_rec(mr[0]), .a_out_valid(pv[0]), .a_out(pr[0]),
      .b_valid(mv[1]), .b_rec(mr[1]), .b_out_valid(pv[1]), .b_out(pr[1]),
      .drop_cnt(pdrop[h])
    );

    for (genvar m = 0; m < 2; m++) begin : g_corr
      lapse_cc u_lapse (
        .clk(clk), .rst(rst), .in_valid(pv[m]), .in_rec(pr[m]),
        .out_valid(lv[m]), .out_rec(lr[m])
      );
      cc_div5 u_div (
        .clk(clk), .rst(rst), .in_valid(lv[m]), .in_rec(lr[m]),
        .out_valid(cv[m]), .out_rec(cr[m])
      );
    end

    feb_sorter #(.SLOT_BITS(SLOT_BITS), .SLOT_DEPTH(SLOT_DEPTH), .DELAY(DELAY)) u_sort (
      .clk(clk), .rst(rst), .now(now),
      .a_valid(cv[0]), .a_hit(rec125_to_sort(cr[0])),
      .b_valid(cv[1]), .b_hit(rec125_to_sort(cr[1])),
      .out_valid(out_valid[h]), .out_word(out_word[h]),
      .late_cnt(late[h]), .full_cnt(full[h])
    );
  end

  assign prbs_ready = &pinit;

  // total of all loss counters, wrapping at 16 bits
  logic [15:0] fifo_drop_acc, loss_other;
  always_ff @(posedge clk) begin
    if (rst) fifo_drop_acc <= '0;
    else     fifo_drop_acc <= fifo_drop_acc + 16'($countones(fifo_full_drop));
  end
  assign drop_cnt = fifo_drop_acc + loss_other;

  always_comb begin
    loss_other = '0;
    for (int l = 0; l < NLINKS; l++) loss_other = loss_other + udrop[l];
    for (int h = 0; h < NHALF; h++) loss_other = loss_other + pdrop[h] + late[h] + full[h];
  end
endmodule
