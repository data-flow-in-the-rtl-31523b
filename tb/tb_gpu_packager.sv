// Checks the 4x1 GPU packager: for each of the four layers, a random set
// of frames (including empty layers and end tags without hits) is offered
// as tags and packed 256-bit hit words, with random gaps on all inputs and
// random DMA stalls. The output stream is parsed package by package; each
// layer sub-package must hold the layer's words, a reference per frame and
// a correct trailer, and the hits read back through the references must
// equal the ones offered, in order.
module tb_gpu_packager;
  import mu3e_pkg::*;
  import tb_mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] hit_valid, hit_ready, tag_valid, tag_ready;
  logic [255:0] hit_word [4];
  tag_t tag [4];
  logic out_valid, out_ready, out_sop, out_eop;
  logic [255:0] out_data;
  logic [1:0] out_layer;
  logic [15:0] pkg_cnt;

  gpu_packager #(.MAX_REFS(64)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NPKG = 60;
  tag_t         tq [4][$];
  logic [255:0] wq [4][$];
  gframe_t      eframes[$];
  logic [95:0]  ehits[$];
  gpu_parser    par = new;
  int           stalls = 0;

  // per package: layers 0..3, each a list of frames, then the package end
  initial begin
    for (int p = 0; p < NPKG; p++) begin
      for (int l = 0; l < 4; l++) begin
        int nf;
        logic [31:0] ts;
        ts = 32'(p * 2048);
        nf = (p % 7 == 3) ? 0 : $urandom_range(0, 12);
        if (p == 5) nf = 64;                   // full reference table
        for (int f = 0; f < nf; f++) begin
          int nh, nw;
          logic [2047:0] bits;
          tag_t t;
          nh = ($urandom_range(0, 3) == 0) ? 8 : $urandom_range(1, 13);
          ts += 32'($urandom_range(1, 30));
          bits = '0;
          for (int k = 0; k < nh; k++) begin
            logic [95:0] h;
            h = {$urandom, $urandom, $urandom};
            bits |= 2048'(h) << (96 * k);
            ehits.push_back(h);
          end
          nw = (96 * nh + 255) / 256;
          for (int w = 0; w < nw; w++) wq[l].push_back(bits[256 * w +: 256]);
          eframes.push_back('{layer: l, ts: ts, nh: nh});
          t.eop = (f == nf - 1) && ($urandom_range(0, 1) == 1);
          t.ts = ts; t.nhits = 16'(nh); t.nwords = 16'(nw);
          tq[l].push_back(t);
        end
        if (nf == 0 || !tq[l][tq[l].size() - 1].eop)
          tq[l].push_back('{eop: 1'b1, ts: ts, nhits: 16'd0, nwords: 16'd0});
      end
    end
  end

  always @(negedge clk) if (!rst) begin
    for (int l = 0; l < 4; l++) begin
      hit_valid[l] = (wq[l].size() != 0) && ($urandom_range(0, 4) != 0);
      hit_word[l]  = (wq[l].size() != 0) ? wq[l][0] : '0;
      tag_valid[l] = (tq[l].size() != 0) && ($urandom_range(0, 4) != 0);
      tag[l]       = (tq[l].size() != 0) ? tq[l][0] : '0;
    end
    out_ready = ($urandom_range(0, 3) != 0);
    if (!out_ready) stalls++;
  end

  always @(posedge clk) if (!rst) begin
    logic [3:0] hv, hr, tv, tr;
    logic ov, orr, sop, eop;
    logic [255:0] od;
    logic [1:0] ol;
    hv = hit_valid; hr = hit_ready; tv = tag_valid; tr = tag_ready;
    ov = out_valid; orr = out_ready; od = out_data; sop = out_sop; eop = out_eop; ol = out_layer;
    #1;
    for (int l = 0; l < 4; l++) begin
      if (hv[l] && hr[l]) void'(wq[l].pop_front());
      if (tv[l] && tr[l]) void'(tq[l].pop_front());
    end
    if (ov && orr) par.put(od, sop, eop, ol);
  end

  initial begin
    hit_valid = 0; tag_valid = 0; out_ready = 0;
    for (int l = 0; l < 4; l++) begin hit_word[l] = '0; tag[l] = '0; end
    repeat (3) @(negedge clk);
    rst = 0;
    wait (par.npkg == NPKG);
    repeat (20) @(negedge clk);
    checks = par.checks; failures += par.failures;
    checks++;
    if (par.frames.size() != eframes.size() || par.hits.size() != ehits.size()) begin
      failures++;
      $display("frames %0d/%0d hits %0d/%0d", par.frames.size(), eframes.size(), par.hits.size(), ehits.size());
    end
    for (int i = 0; i < eframes.size() && i < par.frames.size(); i++) begin
      checks++;
      if (par.frames[i] != eframes[i]) begin
        failures++;
        if (failures < 8) $display("frame %0d: layer %0d ts %0d nh %0d, expected layer %0d ts %0d nh %0d", i, par.frames[i].layer, par.frames[i].ts, par.frames[i].nh, eframes[i].layer, eframes[i].ts, eframes[i].nh);
      end
    end
    for (int i = 0; i < ehits.size() && i < par.hits.size(); i++) begin
      checks++;
      if (par.hits[i] !== ehits[i]) failures++;
    end
    checks += 2;
    if (pkg_cnt != 16'(NPKG)) begin failures++; $display("pkg_cnt %0d", pkg_cnt); end
    if (stalls == 0) failures++;
    $display("packages %0d, frames %0d, hits %0d", par.npkg, eframes.size(), ehits.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
