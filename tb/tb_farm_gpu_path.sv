// Checks the farm data path of four layers end to end: the coordinate
// tables of all layers are written with random corner and step vectors,
// then four independent time-ordered package streams (SOP, SUB, hits,
// EOP) enter with random gaps while the DMA side stalls at random. The
// DMA stream is parsed; for every package and layer the frames must carry
// the full frame number {package, SUB, time} and the hit positions must
// equal s + col * c + row * r in single precision, in input order.
module tb_farm_gpu_path;
  import mu3e_pkg::*;
  import tb_mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we;
  logic [1:0] cfg_layer;
  logic [8:0] cfg_chip;
  logic [3:0] cfg_sel;
  logic [31:0] cfg_data;
  logic [3:0] inj_req, in_valid, in_ready;
  xyz_t inj_pos [4];
  pkt_word_t in_word [4];
  logic out_valid, out_ready, out_sop, out_eop;
  logic [255:0] out_data;
  logic [1:0] out_layer;
  logic [15:0] pkg_cnt;
  logic [15:0] inj_cnt [4], drop_cnt [4];

  farm_gpu_path dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NPKG = 12;
  localparam int NCHIP = 16;
  int           lut [4][NCHIP][9];
  pkt_word_t    wq [4][$];
  gframe_t      ef [NPKG][4][$];
  logic [95:0]  eh [NPKG][4][$];
  gpu_parser    par = new;
  int           stalls = 0;

  function automatic logic [95:0] pos(int l, int c, int col, int row);
    logic [31:0] x, y, z;
    x = f32((real'(lut[l][c][0]) + col * real'(lut[l][c][3]) + row * real'(lut[l][c][6])) / 65536.0);
    y = f32((real'(lut[l][c][1]) + col * real'(lut[l][c][4]) + row * real'(lut[l][c][7])) / 65536.0);
    z = f32((real'(lut[l][c][2]) + col * real'(lut[l][c][5]) + row * real'(lut[l][c][8])) / 65536.0);
    return {z, y, x};
  endfunction

  always @(negedge clk) if (!rst) begin
    out_ready = ($urandom_range(0, 4) != 0);
    if (!out_ready) stalls++;
  end

  always @(posedge clk) if (!rst) begin
    logic ov, orr, sop, eop;
    logic [255:0] od;
    logic [1:0] ol;
    ov = out_valid; orr = out_ready; od = out_data; sop = out_sop; eop = out_eop; ol = out_layer;
    if (ov && orr) par.put(od, sop, eop, ol);
  end

  for (genvar l = 0; l < 4; l++) begin : g_drv
    initial begin
      in_valid[l] = 0; in_word[l] = '0;
      wait (!rst && !cfg_we && wq[l].size() != 0);
      while (wq[l].size() != 0) begin
        @(negedge clk);
        in_valid[l] = ($urandom_range(0, 2) == 0);
        if (in_valid[l]) in_word[l] = wq[l].pop_front();
      end
      @(negedge clk);
      in_valid[l] = 0;
    end
  end

  initial begin
    cfg_we = 1; cfg_layer = 0; cfg_chip = 0; cfg_sel = 0; cfg_data = 0;
    inj_req = 0; out_ready = 0;
    for (int l = 0; l < 4; l++) inj_pos[l] = '0;
    // stimulus and expectations
    for (int p = 0; p < NPKG; p++)
      for (int l = 0; l < 4; l++) begin
        int pk;
        pk = 7 + p;
        wq[l].push_back('{kind: W_SOP, data: 32'(pk)});
        for (int s = 0; s < 128; s++) begin
          int t;
          if ($urandom_range(0, 3) != 0 && s != 0) continue;
          wq[l].push_back('{kind: W_SUB, data: 32'(s)});
          t = 0;
          repeat ($urandom_range(0, 6)) begin
            int c, col, row;
            logic [31:0] ts;
            t += $urandom_range(0, 3);
            if (t > 15) break;
            c = $urandom_range(0, NCHIP - 1);
            col = $urandom_range(0, 255); row = $urandom_range(0, 249);
            wq[l].push_back('{kind: W_HIT, data: {4'(t), 9'(c), 8'(col), 8'(row), 3'd5}});
            ts = 32'(pk * 2048 + s * 16 + t);
            if (ef[p][l].size() != 0 && ef[p][l][ef[p][l].size() - 1].ts == ts)
              ef[p][l][ef[p][l].size() - 1].nh++;
            else
              ef[p][l].push_back('{layer: l, ts: ts, nh: 1});
            eh[p][l].push_back({9'(c), 8'(col), 8'(row)});   // position filled in later
          end
        end
        wq[l].push_back('{kind: W_EOP, data: 32'd0});
      end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int l = 0; l < 4; l++)
      for (int c = 0; c < NCHIP; c++)
        for (int k = 0; k < 9; k++) begin
          int v;
          v = (k < 3) ? (int'($urandom) >>> 6) : (int'($urandom) >>> 17);
          lut[l][c][k] = v;
          cfg_layer = 2'(l); cfg_chip = 9'(c); cfg_sel = 4'(k); cfg_data = 32'(v);
          @(negedge clk);
        end
    cfg_we = 0;
    for (int p = 0; p < NPKG; p++)
      for (int l = 0; l < 4; l++)
        foreach (eh[p][l][i]) begin
          logic [24:0] a;
          a = 25'(eh[p][l][i]);
          eh[p][l][i] = pos(l, int'(a[24:16]), int'(a[15:8]), int'(a[7:0]));
        end
    wait (par.npkg == NPKG);
    repeat (20) @(negedge clk);
    checks = par.checks; failures += par.failures;
    begin
      int fi, hi;
      fi = 0; hi = 0;
      for (int p = 0; p < NPKG; p++)
        for (int l = 0; l < 4; l++) begin
          foreach (ef[p][l][i]) begin
            checks++;
            if (fi >= par.frames.size() || par.frames[fi] != ef[p][l][i]) begin
              failures++;
              if (failures < 8 && fi < par.frames.size())
                $display("pkg %0d layer %0d frame %0d: got ts %0d nh %0d, exp ts %0d nh %0d", p, l, i,
                         par.frames[fi].ts, par.frames[fi].nh, ef[p][l][i].ts, ef[p][l][i].nh);
            end
            fi++;
          end
          foreach (eh[p][l][i]) begin
            checks++;
            if (hi >= par.hits.size() || par.hits[hi] !== eh[p][l][i]) begin
              failures++;
              if (failures < 8 && hi < par.hits.size()) $display("pkg %0d layer %0d hit %0d: %h vs %h", p, l, i, par.hits[hi], eh[p][l][i]);
            end
            hi++;
          end
        end
      checks += 2;
      if (fi != par.frames.size() || hi != par.hits.size()) begin failures++; $display("extra frames or hits"); end
      if (stalls == 0 || pkg_cnt != 16'(NPKG)) failures++;
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (drop_cnt[l] != 0) begin failures++; $display("layer %0d drops %0d", l, drop_cnt[l]); end
      end
      $display("packages %0d, frames %0d, hits %0d", par.npkg, fi, hi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
