// Checks the dummy generator: hits every RATE cycles while enabled, none
// while disabled, channel counting up, and a coarse time that advances by
// 5 * RATE LFSR steps between hits, starting from LFSR position 5 * t
// for a hit issued t cycles after reset.
module tb_dummy_gen;
  import mu3e_pkg::*;
  import tb_mu3e_pkg::*;
  localparam int RATE = 7;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable, rec_valid;
  rec1_t rec;
  logic [14:0] st [32767];
  int pos_of [int];

  dummy_gen #(.ASIC_ID(4'd3), .RATE(RATE)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, last_cyc = -1, last_pos = -1, nhits = 0, nch = -1;
  always @(posedge clk) begin
    if (!rst) cyc++;
    if (!rst && rec_valid) begin
      int p;
      nhits++;
      p = pos_of[int'(rec.tcc)];
      checks++;
      // the value was sampled at the start of the cycle before the output register
      if (p != (5 * (cyc - 2)) % 32767) begin
        failures++; $display("tcc position %0d, expected %0d", p, (5 * (cyc - 2)) % 32767);
      end
      checks++;
      if (rec.asic != 4'd3 || (nch >= 0 && rec.channel != 5'(nch + 1))) begin
        failures++; $display("bad asic/channel");
      end
      nch = int'(rec.channel);
      if (last_cyc >= 0) begin
        checks++;
        if (cyc - last_cyc != RATE) begin failures++; $display("interval %0d", cyc - last_cyc); end
      end
      last_cyc = cyc;
    end
  end

  initial begin
    int n0;
    lfsr_table(st);
    for (int i = 0; i < 32767; i++) pos_of[int'(st[i])] = i;
    enable = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (50) @(negedge clk);
    checks++;
    if (nhits != 0) begin failures++; $display("hits while disabled"); end
    enable = 1;
    repeat (RATE * 1000) @(negedge clk);
    enable = 0;
    n0 = nhits;
    repeat (RATE * 3) @(negedge clk);
    checks++;
    if (n0 < 999 || nhits > n0 + 1) begin failures++; $display("hit count %0d", nhits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
