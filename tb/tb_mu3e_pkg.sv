// Testbench helpers: an 8b/10b encoder, the MuTRiG coarse counter sequence
// and the 48-bit MuTRiG hit layout, written independently of the RTL.
package tb_mu3e_pkg;
  import mu3e_pkg::*;

  // 5b/6b codes (abcdei, a in bit 5) for negative running disparity
  function automatic logic [5:0] code6n(input int x);
    logic [5:0] t [32] = '{6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001,
                           6'b011001, 6'b111000, 6'b111001, 6'b100101, 6'b010101, 6'b110100,
                           6'b001101, 6'b101100, 6'b011100, 6'b010111, 6'b011011, 6'b100011,
                           6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
                           6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110,
                           6'b011110, 6'b101011};
    return t[x];
  endfunction

  // 3b/4b codes (fghj) for negative running disparity; index 8 = A7
  function automatic logic [3:0] code4n(input int y);
    logic [3:0] t [9] = '{4'b1011, 4'b1001, 4'b0101, 4'b1100, 4'b1101, 4'b1010, 4'b0110,
                          4'b1110, 4'b0111};
    return t[y];
  endfunction

  // encode one byte; rd_pos is the running disparity (1 = positive)
  function automatic logic [9:0] enc8b10b(input logic [7:0] d, input logic k, ref logic rd_pos);
    int x, y;
    logic [5:0] c6;
    logic [3:0] c4;
    logic rd6;
    bit a7;
    x = int'(d[4:0]);
    y = int'(d[7:5]);
    if (k) c6 = rd_pos ? 6'b110000 : 6'b001111;
    else begin
      c6 = code6n(x);
      if (rd_pos && ($countones(c6) != 3 || x == 7)) c6 = ~c6;
    end
    rd6 = ($countones(c6) != 3) ? !rd_pos : rd_pos;
    a7 = !k && y == 7 && ((!rd6 && (x == 17 || x == 18 || x == 20)) ||
                          ( rd6 && (x == 11 || x == 13 || x == 14)));
    c4 = code4n(a7 ? 8 : y);
    if (k) begin
      // K28.y: rule for positive disparity after 001111, complemented after 110000
      if ($countones(c4) != 2 || y == 3) c4 = ~c4;
      if (rd_pos) c4 = ~c4;
    end else if (rd6 && ($countones(c4) != 2 || y == 3)) c4 = ~c4;
    rd_pos = ($countones(c4) != 2) ? !rd6 : rd6;
    return {c6, c4};
  endfunction

  // MuTRiG coarse counter: state at each position, x^15 + x^14 + 1, seed 0x7FFF
  function automatic void lfsr_table(ref logic [14:0] st [32767]);
    logic [14:0] s;
    s = 15'h7FFF;
    for (int i = 0; i < 32767; i++) begin
      st[i] = s;
      s = {s[13:0], s[14] ^ s[13]};
    end
  endfunction

  // 48-bit MuTRiG hit as sent on the link
  function automatic logic [47:0] mutrig_hit(input logic [4:0] ch, input logic [14:0] tcc,
                                             input logic [4:0] tf, input logic ef);
    return {ch, 1'b0, tcc, tf, 1'b0, 15'h1234, 5'd3, ef};
  endfunction

  // IEEE-754 single precision bits of a real, rounded to nearest even
  // (via the double representation; normal numbers only)
  function automatic logic [31:0] f32(input real v);
    logic [63:0] b;
    logic [52:0] m;
    logic [24:0] r;
    int e;
    if (v == 0.0) return 32'd0;
    b = $realtobits(v);
    m = {1'b1, b[51:0]};
    e = int'(b[62:52]) - 1023 + 127;
    r = {1'b0, m[52:29]};
    if (m[28] && ((|m[27:0]) || m[29])) r = r + 1'b1;
    if (r[24]) begin r = r >> 1; e++; end
    return {b[63], 8'(e), r[22:0]};
  endfunction

  // Expected-hit book and checker for merged package streams: every
  // package must be SOP (number), SUB 0..127 in order, hits time-sorted
  // within each SUB, EOP; every hit must have been generated exactly once.
  class pkt_checker;
    int expc [longint];
    int nexp = 0, nhits = 0, npkg = 0, checks = 0, failures = 0;
    int pkg = -1, sub = -1, last_t = -1;
    bit inp = 0;
    int first_pkg = 0;

    function longint key(int p, int s, logic [31:0] d);
      return (longint'(p) << 40) | (longint'(s) << 32) | longint'(d);
    endfunction

    // append package p of a source to q; hits carry the source in bits 27:24
    function void gen(int p, int maxhits, int src, ref pkt_word_t q[$]);
      q.push_back('{kind: W_SOP, data: 32'(p)});
      for (int s = 0; s < 128; s++) begin
        int n;
        int ts [$];
        q.push_back('{kind: W_SUB, data: 32'(s)});
        n = $urandom_range(0, maxhits);
        for (int i = 0; i < n; i++) ts.push_back($urandom_range(0, 15));
        ts.sort();
        foreach (ts[i]) begin
          logic [31:0] d;
          longint k;
          d = {4'(ts[i]), 4'(src), 24'($urandom)};
          q.push_back('{kind: W_HIT, data: d});
          k = key(p, s, d);
          if (expc.exists(k)) expc[k]++; else expc[k] = 1;
          nexp++;
        end
      end
      q.push_back('{kind: W_EOP, data: 32'd0});
    endfunction

    function void put(pkt_word_t w);
      checks++;
      unique case (w.kind)
        W_SOP: begin
          if (inp || (pkg >= 0 && int'(w.data) != pkg + 1) || (pkg < 0 && int'(w.data) != first_pkg)) begin
            failures++; $display("checker: bad SOP %0d", w.data);
          end
          pkg = int'(w.data); inp = 1; sub = -1; last_t = -1;
        end
        W_SUB: begin
          if (!inp || int'(w.data) != sub + 1) begin failures++; $display("checker: bad SUB %0d after %0d", w.data, sub); end
          sub = int'(w.data); last_t = -1;
        end
        W_EOP: begin
          if (!inp || sub != 127) begin failures++; $display("checker: bad EOP"); end
          inp = 0; npkg++;
        end
        W_HIT: begin
          longint k;
          k = key(pkg, sub, w.data);
          if (!inp || int'(w.data[31:28]) < last_t) begin
            failures++; if (failures < 10) $display("checker: hit out of order");
          end
          if (!expc.exists(k) || expc[k] == 0) begin
            failures++; if (failures < 10) $display("checker: unexpected hit %h", w.data);
          end else expc[k]--;
          last_t = int'(w.data[31:28]);
          nhits++;
        end
      endcase
    endfunction
  endclass


  // Parser for the GPU package stream: splits a package into its four
  // layer sub-packages, checks trailer, reference table and word counts,
  // and unpacks every frame into (layer, frame number, hits).
  typedef struct {
    int          layer;
    logic [31:0] ts;
    int          nh;
  } gframe_t;

  class gpu_parser;
    logic [255:0] words[$];
    logic [1:0]   lays[$];
    gframe_t      frames[$];
    logic [95:0]  hits[$];
    int           npkg = 0, checks = 0, failures = 0;
    bit           in_pkg = 0;

    function void err(string s);
      failures++;
      if (failures < 8) $display("gpu_parser: %s", s);
    endfunction

    function void put(logic [255:0] d, bit sop, bit eop, logic [1:0] layer);
      checks++;
      if (sop == in_pkg) err("sop/eop framing");
      if (sop) begin words.delete(); lays.delete(); end
      words.push_back(d);
      lays.push_back(layer);
      in_pkg = !eop;
      if (eop) parse();
    endfunction

    function void parse();
      int i = 0;
      for (int l = 0; l < 4; l++) begin
        logic [255:0] sub[$];
        logic [255:0] tr;
        int nw, nr, off;
        logic [31:0] last_ts;
        while (i < words.size() && lays[i] == 2'(l)) begin
          sub.push_back(words[i]);
          i++;
        end
        checks++;
        if (sub.size() == 0) begin err($sformatf("layer %0d missing", l)); continue; end
        tr = sub[sub.size() - 1];
        nw = int'(tr[215:200]);
        nr = int'(tr[199:184]);
        checks += 2;
        if (tr[255:224] != 32'h4D553345 || tr[223:216] != 8'(l)) err("trailer");
        if (sub.size() != nw + (nr + 3) / 4 + 1)
          err($sformatf("layer %0d: %0d words, trailer says %0d+%0d refs", l, sub.size(), nw, nr));
        off = 0;
        for (int r = 0; r < nr; r++) begin
          logic [63:0] e;
          int nh, wo;
          if (nw + r / 4 >= sub.size()) break;
          e  = sub[nw + r / 4][64 * (r % 4) +: 64];
          nh = int'(e[63:48]);
          wo = int'(e[47:32]);
          checks++;
          if (wo != off || nh == 0 || (r > 0 && e[31:0] <= last_ts))
            err($sformatf("layer %0d ref %0d: off %0d/%0d nh %0d ts %0d", l, r, wo, off, nh, e[31:0]));
          last_ts = e[31:0];
          frames.push_back('{layer: l, ts: e[31:0], nh: nh});
          for (int k = 0; k < nh; k++) begin
            int b, w;
            logic [511:0] two;
            b = 96 * k;
            w = wo + b / 256;
            two = {(w + 1 < nw) ? sub[w + 1] : 256'd0, (w < nw) ? sub[w] : 256'd0};
            hits.push_back(96'(two >> (b % 256)));
          end
          off += (96 * nh + 255) / 256;
        end
        checks++;
        if (off != nw) err($sformatf("layer %0d: references cover %0d of %0d words", l, off, nw));
      end
      checks++;
      if (i != words.size()) err("layer order");
      npkg++;
    endfunction
  endclass

endpackage
