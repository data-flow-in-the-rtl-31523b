// Checks the Tag-FIFO / Hit-FIFO packer: random frames of 1..20 hits (and
// single-hit frames, and end-of-package markers with and without an open
// frame) are fed in bursts; both FIFOs are read with random stalls. Every
// tag must give the frame number, hit count and word count, and the hits
// unpacked from the tag's words must equal the ones sent, in order, with
// zero padding. Word counts must be ceil(96 n / 256).
module tb_hit_packer;
  import mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, hit_valid, hit_ready, tag_valid, tag_ready;
  farm_hit_t in_hit;
  logic [255:0] hit_word;
  tag_t tag;
  logic [15:0] drop_cnt;

  hit_packer #(.HIT_DEPTH(256), .TAG_DEPTH(64)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic eop; logic [31:0] ts; int nh; } etag_t;
  etag_t       etags[$];
  logic [95:0] ehits[$];
  logic [255:0] wq[$];
  int ntags = 0, neop = 0, nempty_eop = 0;

  // read side: collect words, consume tags once their words are there
  always @(posedge clk) if (!rst) begin
    if (hit_valid && hit_ready) wq.push_back(hit_word);
  end

  always @(negedge clk) if (!rst) begin
    hit_ready = ($urandom_range(0, 3) != 0);
    tag_ready = 1'b0;
    if (tag_valid && $urandom_range(0, 1) == 1 && wq.size() >= int'(tag.nwords)) begin
      etag_t e;
      int last_idx;
      last_idx = int'(tag.nwords) - 1;
      tag_ready = 1'b1;
      ntags++;
      checks++;
      if (etags.size() == 0) begin failures++; $display("extra tag"); end
      else begin
        e = etags.pop_front();
        if (tag.eop != e.eop || int'(tag.nhits) != e.nh || (e.nh != 0 && tag.ts != e.ts)
            || int'(tag.nwords) != (96 * e.nh + 255) / 256) begin
          failures++;
          $display("tag %p expected %p", tag, e);
        end
        if (tag.eop) neop++;
        if (tag.eop && tag.nhits == 0) nempty_eop++;
        for (int k = 0; k < e.nh; k++) begin
          int b, w;
          logic [511:0] two;
          b = 96 * k; w = b / 256;
          two = {(w + 1 < int'(tag.nwords)) ? wq[w + 1] : 256'd0, wq[w]};
          checks++;
          if (96'(two >> (b % 256)) !== ehits[0]) begin
            failures++;
            if (failures < 8) $display("hit %0d of frame %0d differs", k, e.ts);
          end
          void'(ehits.pop_front());
        end
        // padding of the last word must be zero
        if (e.nh != 0 && (96 * e.nh) % 256 != 0) begin
          logic [255:0] lw;
          lw = wq[last_idx];
          checks++;
          if ((lw >> ((96 * e.nh) % 256)) != 0) begin failures++; $display("padding not zero"); end
        end
        repeat (int'(tag.nwords)) void'(wq.pop_front());
      end
    end
  end

  initial begin
    int ts = 100, open = 0, cur = 0, nh = 0;
    in_valid = 0; in_hit = '0; hit_ready = 0; tag_ready = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int f = 0; f < 1500; f++) begin
      int n;
      if ($urandom_range(0, 9) == 0) begin
        // end of package
        etags.push_back('{eop: 1, ts: 32'(cur), nh: open ? nh : 0});
        in_valid = 1; in_hit = '0; in_hit.eop = 1; in_hit.ts = 32'(ts);
        @(negedge clk);
        open = 0;
        in_valid = 0;
        continue;
      end
      n = ($urandom_range(0, 3) == 0) ? 1 : $urandom_range(1, 20);
      ts += $urandom_range(1, 4);
      if (open) etags.push_back('{eop: 0, ts: 32'(cur), nh: nh});
      cur = ts; nh = n; open = 1;
      for (int k = 0; k < n; k++) begin
        in_valid = 1;
        in_hit.eop = 0; in_hit.ts = 32'(ts);
        in_hit.pos = '{x: $urandom, y: $urandom, z: $urandom};
        ehits.push_back({in_hit.pos.z, in_hit.pos.y, in_hit.pos.x});
        @(negedge clk);
        if ($urandom_range(0, 2) == 0) begin in_valid = 0; repeat ($urandom_range(1, 6)) @(negedge clk); end
      end
      in_valid = 0;
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    etags.push_back('{eop: 1, ts: 32'(cur), nh: open ? nh : 0});
    in_valid = 1; in_hit = '0; in_hit.eop = 1;
    @(negedge clk);
    in_valid = 0;
    repeat (3000) @(negedge clk);
    checks += 3;
    if (etags.size() != 0) begin failures++; $display("%0d tags missing", etags.size()); end
    if (drop_cnt != 0) begin failures++; $display("drops %0d", drop_cnt); end
    if (nempty_eop == 0) begin failures++; $display("no empty end tag seen"); end
    $display("tags %0d, end tags %0d (empty %0d)", ntags, neop, nempty_eop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
