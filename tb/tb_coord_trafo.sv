// Checks the coordinate transformation: random corner and step vectors are
// written for a set of chips; hits on them must come out three cycles
// later with the frame number {package, SUB, time} and x, y, z equal to
// s + col * c + row * r (LSB = 2^-16 mm) rounded to single precision,
// computed here in double precision. EOP must come out as an end marker.
module tb_coord_trafo;
  import mu3e_pkg::*;
  import tb_mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we, in_valid, out_valid;
  logic [8:0] cfg_chip;
  logic [3:0] cfg_sel;
  logic [31:0] cfg_data;
  pkt_word_t in_word;
  farm_hit_t out_hit;
  int lut [512][9];

  coord_trafo dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input pkt_word_t w);
    in_valid = 1; in_word = w;
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    farm_hit_t expq[$];
    int chips [$];
    cfg_we = 0; in_valid = 0; in_word = '0; cfg_chip = 0; cfg_sel = 0; cfg_data = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 24; i++) begin
      int c;
      c = (i == 0) ? 0 : (i == 1) ? 511 : $urandom_range(2, 510);
      chips.push_back(c);
      for (int k = 0; k < 9; k++) begin
        int v;
        if (k < 3) v = (i == 2) ? 0 : int'($urandom) >>> $urandom_range(1, 8);
        else       v = (i == 3) ? -2147483647 : int'($urandom) >>> $urandom_range(14, 20);
        lut[c][k] = v;
        cfg_we = 1; cfg_chip = 9'(c); cfg_sel = 4'(k); cfg_data = 32'(v);
        @(negedge clk);
      end
    end
    cfg_we = 0;
    for (int p = 3; p < 15; p++) begin
      send('{kind: W_SOP, data: 32'(p)});
      for (int s = 0; s < 128; s += 5) begin
        send('{kind: W_SUB, data: 32'(s)});
        repeat ($urandom_range(0, 3)) begin
          int c, col, row, t;
          logic [31:0] d;
          farm_hit_t e;
          c = chips[$urandom_range(0, chips.size() - 1)];
          col = $urandom_range(0, 255); row = $urandom_range(0, 255);
          t = $urandom_range(0, 15);
          d = {4'(t), 9'(c), 8'(col), 8'(row), 3'd0};
          e.eop = 0;
          e.ts  = 32'(p * 2048 + s * 16 + t);
          e.pos.x = f32((real'(lut[c][0]) + col * real'(lut[c][3]) + row * real'(lut[c][6])) / 65536.0);
          e.pos.y = f32((real'(lut[c][1]) + col * real'(lut[c][4]) + row * real'(lut[c][7])) / 65536.0);
          e.pos.z = f32((real'(lut[c][2]) + col * real'(lut[c][5]) + row * real'(lut[c][8])) / 65536.0);
          in_valid = 1; in_word = '{kind: W_HIT, data: d};
          @(negedge clk);
          in_valid = 0;
          @(negedge clk);        // output appears three cycles after the input
          @(negedge clk);
          checks++;
          if (!out_valid || out_hit !== e) begin
            failures++;
            if (failures < 6) $display("chip %0d col %0d row %0d: got %h exp %h", c, col, row, out_hit, e);
          end
        end
      end
      send('{kind: W_EOP, data: 32'd0});
      @(negedge clk); @(negedge clk);
      checks++;
      if (!out_valid || !out_hit.eop) begin failures++; $display("EOP marker missing"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
