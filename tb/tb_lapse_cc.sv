// Checks the lapse correction over several wraps of the MuTRiG counter:
// a hit taken at 625 MHz tick T carries T mod (2^15-1) and is presented
// 0 to 30000 ticks later; the output must be T mod (5 * 2^15), one cycle
// after the input.
module tb_lapse_cc;
  import mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  rec1_t in_rec;
  rec625_t out_rec;
  longint kk = 0;

  lapse_cc dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) kk++;

  initial begin
    longint t, expv;
    in_valid = 0; in_rec = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 70000; i++) begin
      @(negedge clk);
      t = 5 * kk - longint'($urandom_range(0, 30000));
      if (t >= 0 && $urandom_range(0, 3) == 0) begin
        in_valid = 1;
        in_rec = rec1_t'($urandom);
        in_rec.tcc = 15'(t % 32767);
        expv = t % 163840;
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid || longint'(out_rec.c625) != expv || out_rec.channel != in_rec.channel) begin
          failures++;
          if (failures < 5) $display("T=%0d got %0d exp %0d", t, out_rec.c625, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
