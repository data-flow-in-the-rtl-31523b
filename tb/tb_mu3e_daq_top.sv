// End-to-end check of the readout slice at its full default size.
//
// Fibre side: six MuTRiG links send 8b/10b-encoded frames whose coarse
// counters are LFSR states, two links run the dummy generator; two further
// FEB streams enter switching-board inputs 2 and 3 and inputs 4-7 are
// masked while still being fed. Every hit of the real links and of inputs
// 2/3 must leave the merged fibre stream once, with its full timestamp,
// time ordered within each package; no masked hit may appear. A burst of
// hits in one 8 ns tick overfills a sorter slot, and the loss must show in
// the FEB loss counter and nowhere else.
// Pixel side: 32 FEB streams (eight per layer, input 7 masked) carry
// packages of pixel hits; the farm's coordinate tables are written first.
// The DMA stream is parsed: every pixel hit must appear in the GPU package
// of its layer and frame with the transformed position, and every injected
// debug hit must appear once.
// Each mechanism is counted (link lock, PRBS table init, dummy hits,
// counter wrap, SOP/SUB framing, masking, slot overflow, backpressure on
// FEB inputs, DMA and fibre output stalls, injection, GPU packages) and
// the test fails if one of them never happened.
module tb_mu3e_daq_top;
  import mu3e_pkg::*;
  import tb_mu3e_pkg::*;

  logic clk125 = 0, clk250 = 0, rst125 = 1, rst250 = 1;
  always #4 clk125 = ~clk125;
  always #2 clk250 = ~clk250;
  int checks = 0, failures = 0;

  logic [7:0]   rx_clk = '0;
  logic [9:0]   rx_word [8];
  logic [7:0]   dummy_sel, rx_locked;
  logic         prbs_ready;
  logic [15:0]  feb_drop_cnt;
  logic [7:0]   fibre_mask;
  logic [5:0]   fibre_ext_valid, fibre_ext_ready;
  pkt_word_t    fibre_ext_word [6];
  logic         fibre_out_valid, fibre_out_ready, fibre_feb_overflow;
  pkt_word_t    fibre_out_word;
  logic [7:0]   pix_mask [4], pix_valid [4], pix_ready [4];
  pkt_word_t    pix_word [4][8];
  logic         cfg_we;
  logic [1:0]   cfg_layer;
  logic [8:0]   cfg_chip;
  logic [3:0]   cfg_sel;
  logic [31:0]  cfg_data;
  logic [3:0]   inj_req;
  xyz_t         inj_pos [4];
  logic         dma_valid, dma_ready, dma_sop, dma_eop;
  logic [255:0] dma_data;
  logic [1:0]   dma_layer;
  logic [15:0]  gpu_pkg_cnt;
  logic [15:0]  inj_cnt [4], farm_drop_cnt [4];

  mu3e_daq_top dut (.*);

  for (genvar l = 0; l < 8; l++) begin : g_clk
    initial begin
      #(l);
      forever #4 rx_clk[l] = ~rx_clk[l];
    end
  end

  initial begin
    repeat (400000) @(posedge clk125);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NPF   = 40;     // fibre packages followed
  localparam int NPP   = 8;      // pixel packages per input
  localparam int NCHIP = 32;

  // mechanism counters
  int m_lock = 0, m_prbs = 0, m_dummy = 0, m_wraps = 0, m_sop = 0, m_sub = 0;
  int m_mask = 0, m_overflow = 0, m_ext_bp = 0, m_dma_stall = 0;
  int m_fib_stall = 0, m_inj = 0, m_gpu = 0;

  // ---------------- fibre FEB links ----------------
  logic [14:0] st [32767];
  bit   bq [8][$];
  logic rdp [8];
  int   fexp [longint];
  int   nfexp = 0, nfout = 0;
  longint kk = 0;
  bit   gen_on = 0, burst = 0;
  int   wrap_seen [int];

  task automatic sym(input int l, input logic [7:0] d, input logic k);
    logic [9:0] s;
    logic r;
    r = rdp[l];
    s = enc8b10b(d, k, r);
    rdp[l] = r;
    for (int i = 9; i >= 0; i--) bq[l].push_back(s[i]);
  endtask

  function automatic void fexp_add(longint key);
    if (fexp.exists(key)) fexp[key]++; else fexp[key] = 1;
    nfexp++;
  endfunction

  for (genvar l = 0; l < 8; l++) begin : g_ser
    always @(negedge rx_clk[l]) begin
      if (bq[l].size() < 10) sym(l, K28_5, 1);
      for (int i = 9; i >= 0; i--) rx_word[l][i] = bq[l].pop_front();
    end
  end

  always @(posedge clk125) if (!rst125) kk++;

  task automatic mutrig_frame(input int l, input int n, input longint tfix);
    sym(l, K28_0, 1);
    for (int h = 0; h < n; h++) begin
      longint t;
      logic [4:0] ch, tf;
      logic ef;
      t  = (tfix >= 0) ? tfix : 5 * kk - longint'($urandom_range(0, 200));
      ch = 5'($urandom); tf = 5'($urandom); ef = 1'($urandom);
      for (int b = 5; b >= 0; b--) sym(l, mutrig_hit(ch, st[t % 32767], tf, ef)[8*b +: 8], 0);
      fexp_add((longint'((t / 5) % 32768) << 28) | longint'({4'(l), ch, 3'(t % 5), tf, ef, 10'd0}));
    end
    sym(l, K28_4, 1);
  endtask

  always @(negedge clk125) if (gen_on) begin
    for (int l = 0; l < 6; l++)
      if (bq[l].size() < 100 && $urandom_range(0, 59) == 0) mutrig_frame(l, $urandom_range(1, 3), -1);
  end

  // ---------------- fibre SWB inputs 2..7 ----------------
  // inputs 2, 3: package streams with ASIC numbers 8 + input; 4..7 masked,
  // carrying ASIC numbers that must never come out
  pkt_word_t extq [6][$];
  initial begin
    for (int i = 0; i < 6; i++)
      for (int p = 0; p < NPF + 8; p++) begin
        extq[i].push_back('{kind: W_SOP, data: 32'(p)});
        for (int s = 0; s < 128; s++) begin
          int t4;
          extq[i].push_back('{kind: W_SUB, data: 32'(s)});
          t4 = 0;
          if (p < NPF - 4 && $urandom_range(0, (i == 0) ? 0 : 4) == 0)
            repeat ($urandom_range(1, 2)) begin
              logic [31:0] d;
              t4 += $urandom_range(0, 7);
              if (t4 > 15) break;
              d = {4'(t4), 4'(8 + i), 5'($urandom), 3'($urandom), 5'($urandom), 1'($urandom), 10'd0};
              extq[i].push_back('{kind: W_HIT, data: d});
              if (i < 2) fexp_add((longint'((p * 2048 + s * 16 + t4) % 32768) << 28) | longint'(d[27:0]));
            end
        end
        extq[i].push_back('{kind: W_EOP, data: 32'd0});
      end
  end

  always @(negedge clk125) if (!rst125) begin
    for (int i = 0; i < 6; i++) begin
      fibre_ext_valid[i] = (extq[i].size() != 0) && (i >= 2 || $urandom_range(0, 3) != 0);
      fibre_ext_word[i]  = (extq[i].size() != 0) ? extq[i][0] : '0;
    end
  end
  always @(posedge clk125) if (!rst125) begin
    logic [5:0] v, r;
    v = fibre_ext_valid; r = fibre_ext_ready;
    #1;
    for (int i = 2; i < 6; i++) if (v[i] && r[i] && extq[i][0].kind == W_HIT) m_mask++;
    for (int i = 0; i < 6; i++) if (v[i] && r[i]) void'(extq[i].pop_front());
    if ((v[1:0] & ~r[1:0]) != 0) m_ext_bp++;
  end

  // ---------------- fibre output parser ----------------
  int fpkg = -1, fsub = -1, flast = -1, finp = 0, fpk_done = 0;
  always @(negedge clk250) if (!rst250) begin
    fibre_out_ready = ($urandom_range(0, 9) != 0);
    if (fibre_out_valid && !fibre_out_ready) m_fib_stall++;
  end
  always @(posedge clk250) if (!rst250 && fibre_out_valid && fibre_out_ready) begin
    pkt_word_t w;
    w = fibre_out_word;
    unique case (w.kind)
      W_SOP: begin
        checks++;
        if (finp || int'(w.data) != fpkg + 1) begin failures++; $display("fibre: bad SOP %0d", w.data); end
        fpkg = int'(w.data); finp = 1; fsub = -1; flast = -1;
        m_sop++;
      end
      W_SUB: begin
        checks++;
        if (int'(w.data) != fsub + 1) begin failures++; $display("fibre: bad SUB"); end
        fsub = int'(w.data);
        m_sub++;
      end
      W_EOP: begin
        checks++;
        if (fsub != 127 || !finp) begin failures++; $display("fibre: bad EOP"); end
        finp = 0;
        fpk_done++;
      end
      W_HIT: begin
        int t, asic;
        longint key;
        t = fpkg * 2048 + fsub * 16 + int'(w.data[31:28]);
        asic = int'(w.data[27:24]);
        checks++;
        if (t < flast || asic >= 12) begin failures++; $display("fibre: order or masked hit, asic %0d", asic); end
        flast = t;
        if (asic == 6 || asic == 7) m_dummy++;
        else begin
          key = (longint'(t % 32768) << 28) | longint'(w.data[27:0]);
          checks++;
          if (!fexp.exists(key) || fexp[key] == 0) begin
            failures++;
            if (failures < 10) $display("fibre: unexpected hit t=%0d asic %0d", t, asic);
          end else fexp[key]--;
          nfout++;
          if (asic < 6) wrap_seen[(t * 5) / 32767] = 1;
        end
      end
    endcase
  end

  // ---------------- pixel inputs ----------------
  pkt_word_t pq [4][8][$];
  int        pexp [logic [129:0]];
  int        npexp = 0;
  int        lut [4][NCHIP][9];
  bit        cfg_done = 0;

  function automatic logic [95:0] pix_pos(int l, int c, int col, int row);
    logic [31:0] x, y, z;
    x = f32((real'(lut[l][c][0]) + col * real'(lut[l][c][3]) + row * real'(lut[l][c][6])) / 65536.0);
    y = f32((real'(lut[l][c][1]) + col * real'(lut[l][c][4]) + row * real'(lut[l][c][7])) / 65536.0);
    z = f32((real'(lut[l][c][2]) + col * real'(lut[l][c][5]) + row * real'(lut[l][c][8])) / 65536.0);
    return {z, y, x};
  endfunction

  initial begin
    for (int l = 0; l < 4; l++)
      for (int c = 0; c < NCHIP; c++)
        for (int k = 0; k < 9; k++)
          lut[l][c][k] = (k < 3) ? (int'($urandom) >>> 8) : (int'($urandom) >>> 18);
    for (int l = 0; l < 4; l++)
      for (int i = 0; i < 8; i++)
        for (int p = 0; p < NPP; p++) begin
          pq[l][i].push_back('{kind: W_SOP, data: 32'(p)});
          for (int s = 0; s < 128; s++) begin
            int t4;
            pq[l][i].push_back('{kind: W_SUB, data: 32'(s)});
            t4 = 0;
            if ($urandom_range(0, 5) == 0)
              repeat ($urandom_range(1, 3)) begin
                int c, col, row;
                t4 += $urandom_range(0, 5);
                if (t4 > 15) break;
                c = (i == 7) ? 400 : $urandom_range(0, NCHIP - 1);
                col = $urandom_range(0, 255); row = $urandom_range(0, 249);
                pq[l][i].push_back('{kind: W_HIT, data: {4'(t4), 9'(c), 8'(col), 8'(row), 3'd1}});
                if (i != 7) begin
                  logic [129:0] key;
                  key = {2'(l), 32'(p * 2048 + s * 16 + t4), pix_pos(l, c, col, row)};
                  if (pexp.exists(key)) pexp[key]++; else pexp[key] = 1;
                  npexp++;
                end
              end
          end
          pq[l][i].push_back('{kind: W_EOP, data: 32'd0});
        end
  end

  always @(negedge clk125) if (!rst125) begin
    for (int l = 0; l < 4; l++)
      for (int i = 0; i < 8; i++) begin
        pix_valid[l][i] = cfg_done && (pq[l][i].size() != 0) && ($urandom_range(0, 3) == 0 || i == 7);
        pix_word[l][i]  = (pq[l][i].size() != 0) ? pq[l][i][0] : '0;
      end
  end
  always @(posedge clk125) if (!rst125) begin
    logic [7:0] v [4], r [4];
    v = pix_valid; r = pix_ready;
    #1;
    for (int l = 0; l < 4; l++)
      for (int i = 0; i < 8; i++)
        if (v[l][i] && r[l][i]) begin
          if (i == 7 && pq[l][i][0].kind == W_HIT) m_mask++;
          void'(pq[l][i].pop_front());
        end
  end

  // ---------------- DMA side ----------------
  gpu_parser par = new;
  int  stall_phase = 0;
  always @(negedge clk250) if (!rst250) begin
    dma_ready = (stall_phase > 0) ? 1'b0 : ($urandom_range(0, 4) != 0);
    if (stall_phase > 0) stall_phase--;
    if (dma_valid && !dma_ready) m_dma_stall++;
  end
  always @(posedge clk250) if (!rst250 && dma_valid && dma_ready)
    par.put(dma_data, dma_sop, dma_eop, dma_layer);

  // ---------------- sequence ----------------
  initial begin
    int ninj;
    ninj = 0;
    lfsr_table(st);
    for (int l = 0; l < 8; l++) begin
      rdp[l] = 0;
      repeat (l + 1) bq[l].push_back(1'b1);
    end
    dummy_sel = 8'h00;
    fibre_mask = 8'hF0;
    for (int l = 0; l < 4; l++) begin pix_mask[l] = 8'h80; inj_pos[l] = '0; end
    cfg_we = 0; cfg_layer = 0; cfg_chip = 0; cfg_sel = 0; cfg_data = 0; inj_req = 0;
    fibre_ext_valid = 0; dma_ready = 0; fibre_out_ready = 0;
    for (int l = 0; l < 4; l++) pix_valid[l] = 0;
    repeat (5) @(negedge clk125);
    rst125 = 0; rst250 = 0;
    // farm coordinate tables
    for (int l = 0; l < 4; l++)
      for (int c = 0; c < NCHIP; c++)
        for (int k = 0; k < 9; k++) begin
          @(negedge clk250);
          cfg_we = 1; cfg_layer = 2'(l); cfg_chip = 9'(c); cfg_sel = 4'(k); cfg_data = 32'(lut[l][c][k]);
        end
    @(negedge clk250);
    cfg_we = 0;
    cfg_done = 1;
    // debug injections, a few per layer, and a long DMA stall while the
    // pixel packages arrive
    for (int n = 0; n < 12; n++) begin
      if (n == 6) stall_phase = 3000;
      repeat ($urandom_range(100, 400)) @(negedge clk250);
      inj_req[n % 4] = 1;
      inj_pos[n % 4] = '{x: {16'hFFC0, 16'(n)}, y: 32'(n), z: 32'(n % 4)};
      @(negedge clk250);
      inj_req = 0;
      ninj++;
    end
    // fibre: wait for the PRBS table, then real and dummy traffic
    wait (prbs_ready);
    checks++;
    if (kk >= 32767) m_prbs++;
    if (rx_locked == 8'hFF) m_lock++;
    @(negedge clk125);
    dummy_sel = 8'hC0;
    gen_on = 1;
    repeat (4000) @(negedge clk125);
    // burst: twelve hits of one 8 ns tick on the four links of one half
    for (int l = 0; l < 4; l++) mutrig_frame(l, 3, 5 * kk - 100);
    while (kk < longint'((NPF - 6) * 2048)) @(negedge clk125);
    gen_on = 0;
    dummy_sel = 8'h00;
    wait (fpk_done >= NPF && par.npkg >= NPP);
    repeat (2000) @(negedge clk250);

    // ---------------- results ----------------
    checks += par.checks; failures += par.failures;
    m_gpu = par.npkg;
    begin
      int fi, hi, npout;
      fi = 0; npout = 0;
      for (int f = 0; f < par.frames.size(); f++)
        for (int k = 0; k < par.frames[f].nh; k++) begin
          logic [95:0] h;
          logic [129:0] key;
          h = par.hits[fi];
          fi++;
          if (h[31:16] == 16'hFFC0) begin
            checks++;
            m_inj++;
            if (par.frames[f].layer != int'(h[95:64])) begin failures++; $display("injected hit in wrong layer"); end
            continue;
          end
          key = {2'(par.frames[f].layer), par.frames[f].ts, h};
          checks++;
          if (!pexp.exists(key) || pexp[key] == 0) begin
            failures++;
            if (failures < 10) $display("pixel: unexpected hit layer %0d ts %0d", par.frames[f].layer, par.frames[f].ts);
          end else pexp[key]--;
          npout++;
        end
      checks++;
      if (npout != npexp) begin failures++; $display("pixel hits out %0d of %0d", npout, npexp); end
      checks++;
      if (m_inj != ninj || int'(inj_cnt[0] + inj_cnt[1] + inj_cnt[2] + inj_cnt[3]) != ninj) begin
        failures++; $display("injections %0d seen, %0d requested", m_inj, ninj);
      end
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (farm_drop_cnt[l] != 0) begin failures++; $display("farm drops layer %0d", l); end
      end
      $display("pixel hits %0d, injected %0d, GPU packages %0d", npout, m_inj, gpu_pkg_cnt);
    end
    m_overflow = int'(feb_drop_cnt);
    m_wraps = wrap_seen.num();
    checks++;
    if (nfout != nfexp - int'(feb_drop_cnt) || nfexp < 500) begin
      failures++; $display("fibre hits out %0d of %0d, lost %0d", nfout, nfexp, feb_drop_cnt);
    end
    checks++;
    if (fibre_feb_overflow) failures++;
    checks++;
    if (gpu_pkg_cnt != 16'(NPP)) begin failures++; $display("GPU packages %0d", gpu_pkg_cnt); end
    $display("fibre hits %0d (expected %0d, sorter losses %0d), dummy %0d, packages %0d",
             nfout, nfexp, feb_drop_cnt, m_dummy, fpk_done);
    $display("mechanisms: lock %0d prbs %0d dummy %0d wraps %0d sop %0d sub %0d mask %0d overflow %0d",
             m_lock, m_prbs, m_dummy, m_wraps, m_sop, m_sub, m_mask, m_overflow);
    $display("            feb_backpressure %0d gpu_packages %0d dma_stall %0d fibre_stall %0d inj %0d",
             m_ext_bp, m_gpu, m_dma_stall, m_fib_stall, m_inj);
    begin
      int mech [13];
      mech = '{m_lock, m_prbs, m_dummy, m_wraps > 1, m_sop, m_sub, m_mask, m_overflow,
               m_ext_bp, m_gpu > 1, m_dma_stall, m_fib_stall, m_inj};
      foreach (mech[i]) begin
        checks++;
        if (mech[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
