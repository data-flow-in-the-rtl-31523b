// Checks the eight-to-one time alignment tree (reduced layer-1 FIFOs of
// 64 words). Seven inputs send the same four packages with random hits
// from the 125 MHz side, input 5 is masked (as in the paper's example);
// the 250 MHz output must be one time-sorted stream holding every hit
// once. With all inputs saturated, the output must be busy in at least
// 80 % of the 250 MHz cycles while data flows (the tree's throughput).
module tb_ta_tree;
  import mu3e_pkg::*;
  import tb_mu3e_pkg::*;
  logic clk125 = 0, clk250 = 0, rst125 = 1, rst250 = 1;
  always #4 clk125 = ~clk125;
  always #2 clk250 = ~clk250;
  int checks = 0, failures = 0;

  logic [7:0] mask, in_valid, in_ready;
  pkt_word_t  in_word [8];
  logic out_valid, out_ready;
  pkt_word_t out_word;
  pkt_word_t q [8][$];
  pkt_checker chk;
  int busy = 0, cyc = 0;
  bit counting = 0;

  ta_tree #(.N(8), .L1_DEPTH(64)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk250);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar i = 0; i < 8; i++) begin : g_src
    assign in_valid[i] = q[i].size() > 0;
    assign in_word[i]  = q[i].size() > 0 ? q[i][0] : '0;
    always @(posedge clk125) if (!rst125) begin
      bit p;
      p = in_valid[i] && in_ready[i];
      #1;
      if (p) void'(q[i].pop_front());
    end
  end

  assign out_ready = 1'b1;
  always @(posedge clk250) if (!rst250) begin
    if (out_valid) chk.put(out_word);
    if (counting) begin cyc++; if (out_valid) busy++; end
  end

  initial begin
    chk = new();
    mask = 8'b0010_0000;
    for (int p = 0; p < 4; p++)
      for (int i = 0; i < 8; i++)
        if (i != 5) chk.gen(p, 4, i, q[i]);
    repeat (4) @(negedge clk125);
    rst125 = 0; rst250 = 0;
    repeat (200) @(negedge clk250);
    counting = 1;
    repeat (6000) @(negedge clk250);
    counting = 0;
    for (int i = 0; i < 8; i++) wait (q[i].size() == 0);
    repeat (2000) @(negedge clk250);
    checks += chk.checks + 3; failures += chk.failures;
    if (chk.npkg != 4) begin failures++; $display("packages %0d", chk.npkg); end
    if (chk.nhits != chk.nexp) begin failures++; $display("hits %0d of %0d", chk.nhits, chk.nexp); end
    if (busy * 100 < cyc * 80) begin failures++; $display("output busy %0d of %0d cycles", busy, cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
