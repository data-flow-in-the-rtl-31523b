// End-to-end check of the fibre FEB data path. Six links carry MuTRiG
// frames (8b/10b encoded, each link at its own bit offset and RX clock
// phase) with hits whose coarse counter is the LFSR state of their 625 MHz
// tick; two links run the dummy generator. Every link hit must leave the
// sorted output streams once, with the 125 MHz timestamp and 625 MHz
// remainder of its tick, in time order and in valid package framing.
module tb_feb_scifi;
  import mu3e_pkg::*;
  import tb_mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0]  rx_clk = '0;
  logic [9:0]  rx_word [8];
  logic [7:0]  dummy_sel, locked;
  logic        prbs_ready;
  logic [31:0] now;
  logic [1:0]  out_valid;
  pkt_word_t   out_word [2];
  logic [15:0] drop_cnt;

  feb_scifi dut (.*);

  for (genvar l = 0; l < 8; l++) begin : g_clk
    initial begin
      #(l);
      forever #4 rx_clk[l] = ~rx_clk[l];
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [14:0] st [32767];
  bit   bq [8][$];
  logic rdp [8];
  int   exp_cnt [longint];
  int   nexp = 0, nout = 0, ndummy = 0;
  longint kk = 0;
  bit   gen_on = 0;

  task automatic sym(input int l, input logic [7:0] d, input logic k);
    logic [9:0] s;
    logic r;
    r = rdp[l];
    s = enc8b10b(d, k, r);
    rdp[l] = r;
    for (int i = 9; i >= 0; i--) bq[l].push_back(s[i]);
  endtask

  // deserialiser model: 10 bits per RX clock, idles when nothing is queued
  for (genvar l = 0; l < 8; l++) begin : g_ser
    always @(negedge rx_clk[l]) begin
      if (bq[l].size() < 10) sym(l, K28_5, 1);
      for (int i = 9; i >= 0; i--) rx_word[l][i] = bq[l].pop_front();
    end
  end

  always @(posedge clk) if (!rst) kk++;

  // frame generator
  always @(negedge clk) if (gen_on) begin
    for (int l = 0; l < 6; l++) begin
      if (bq[l].size() < 100 && $urandom_range(0, 39) == 0) begin
        int n;
        n = $urandom_range(1, 3);
        sym(l, K28_0, 1);
        for (int h = 0; h < n; h++) begin
          longint t;
          logic [4:0] ch, tf;
          logic ef;
          logic [47:0] w;
          longint key;
          t  = 5 * kk - longint'($urandom_range(0, 200));
          ch = 5'($urandom); tf = 5'($urandom); ef = 1'($urandom);
          w  = mutrig_hit(ch, st[t % 32767], tf, ef);
          for (int b = 5; b >= 0; b--) sym(l, w[8*b +: 8], 0);
          key = (longint'((t / 5) % 32768) << 28) |
                longint'({4'(l), ch, 3'(t % 5), tf, ef, 10'd0});
          if (exp_cnt.exists(key)) exp_cnt[key]++; else exp_cnt[key] = 1;
          nexp++;
        end
        sym(l, K28_4, 1);
      end
    end
  end

  // output parsers
  int pkg [2] = '{-1, -1};
  int sub [2], last_t [2], inp [2] = '{0, 0};
  for (genvar s = 0; s < 2; s++) begin : g_par
    always @(posedge clk) if (!rst && out_valid[s]) begin
      unique case (out_word[s].kind)
        W_SOP: begin
          checks++;
          if (inp[s] || int'(out_word[s].data) != pkg[s] + 1) begin failures++; $display("bad SOP"); end
          pkg[s] = int'(out_word[s].data); inp[s] = 1; sub[s] = -1; last_t[s] = -1;
        end
        W_SUB: begin
          checks++;
          if (int'(out_word[s].data) != sub[s] + 1) begin failures++; $display("bad SUB"); end
          sub[s] = int'(out_word[s].data);
        end
        W_EOP: begin
          checks++;
          if (sub[s] != 127) begin failures++; $display("bad EOP"); end
          inp[s] = 0;
        end
        W_HIT: begin
          int t, asic;
          longint key;
          t = pkg[s] * 2048 + sub[s] * 16 + int'(out_word[s].data[31:28]);
          asic = int'(out_word[s].data[27:24]);
          checks++;
          if (t < last_t[s] || asic / 4 != s) begin failures++; $display("order/stream error"); end
          last_t[s] = t;
          if (asic >= 6) ndummy++;
          else begin
            key = (longint'(t % 32768) << 28) | longint'(out_word[s].data[27:0]);
            checks++;
            if (!exp_cnt.exists(key) || exp_cnt[key] == 0) begin
              failures++;
              if (failures < 10) $display("unexpected hit t=%0d asic %0d data %h", t, asic, out_word[s].data);
            end else exp_cnt[key]--;
            nout++;
          end
        end
      endcase
    end
  end

  initial begin
    lfsr_table(st);
    for (int l = 0; l < 8; l++) begin
      rdp[l] = 0;
      repeat (l + 1) bq[l].push_back(1'b1);     // per-link bit offset
    end
    dummy_sel = 8'h00;
    repeat (5) @(negedge clk);
    rst = 0;
    wait (prbs_ready);
    checks++;
    if (locked != 8'hFF) begin failures++; $display("links not locked %b", locked); end
    @(negedge clk);
    dummy_sel = 8'hC0;
    gen_on = 1;
    repeat (6000) @(negedge clk);
    gen_on = 0;
    dummy_sel = 8'h00;
    repeat (800) @(negedge clk);
    checks++;
    if (nout != nexp || nexp < 500) begin failures++; $display("hits out %0d of %0d", nout, nexp); end
    checks++;
    if (ndummy < 100) begin failures++; $display("dummy hits %0d", ndummy); end
    checks++;
    if (drop_cnt != 0) begin failures++; $display("drop_cnt %0d", drop_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
