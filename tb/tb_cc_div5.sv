// Checks CC / 5 on random and corner values: quotient and remainder of the
// 625 MHz count by five, one cycle after the input.
module tb_cc_div5;
  import mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  rec625_t in_rec;
  rec125_t out_rec;

  cc_div5 dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    in_valid = 0; in_rec = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      v = (i == 0) ? 0 : (i == 1) ? 163839 : (i == 2) ? 4 : $urandom_range(0, 163839);
      in_valid = 1;
      in_rec = rec625_t'($urandom);
      in_rec.c625 = 18'(v);
      @(negedge clk);
      checks++;
      if (!out_valid || int'(out_rec.ts) != v / 5 || int'(out_rec.rem) != v % 5 ||
          out_rec.tfine != in_rec.tfine) begin
        failures++;
        if (failures < 5) $display("%0d -> %0d r %0d", v, out_rec.ts, out_rec.rem);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
