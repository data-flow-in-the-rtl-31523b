// Checks one time alignment node. Phase 1: two sources send the same
// packages with random hits, random gaps and random output backpressure;
// the output must be the time-sorted union in valid framing. Phase 2:
// input b masked; the output must equal stream a word for word and the
// node must report itself unmasked. Phase 3: both masked, output masked.
module tb_ta_merge;
  import mu3e_pkg::*;
  import tb_mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_mask, b_mask, a_valid, a_ready, b_valid, b_ready, out_mask, out_valid, out_ready;
  pkt_word_t a_word, b_word, out_word;
  pkt_word_t qa[$], qb[$];
  pkt_checker chk;
  bit gap_a, gap_b;

  ta_merge dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign a_valid = qa.size() > 0 && !gap_a;
  assign b_valid = qb.size() > 0 && !gap_b;
  assign a_word  = qa.size() > 0 ? qa[0] : '0;
  assign b_word  = qb.size() > 0 ? qb[0] : '0;

  always @(posedge clk) if (!rst) begin
    bit pa, pb, po;
    pa = a_valid && a_ready; pb = b_valid && b_ready; po = out_valid && out_ready;
    if (po) chk.put(out_word);
    #1;
    if (pa) void'(qa.pop_front());
    if (pb) void'(qb.pop_front());
  end

  always @(negedge clk) begin
    gap_a = ($urandom_range(0, 4) == 0);
    gap_b = ($urandom_range(0, 4) == 0);
    out_ready = ($urandom_range(0, 3) != 0);
  end

  initial begin
    pkt_word_t ref_q[$];
    chk = new();
    a_mask = 0; b_mask = 0;
    for (int p = 0; p < 4; p++) begin
      chk.gen(p, 3, 1, qa);
      chk.gen(p, 3, 2, qb);
    end
    repeat (3) @(negedge clk);
    rst = 0;
    wait (qa.size() == 0 && qb.size() == 0);
    repeat (5) @(negedge clk);
    checks += chk.checks + 2; failures += chk.failures;
    if (chk.npkg != 4) begin failures++; $display("packages %0d", chk.npkg); end
    if (chk.nhits != chk.nexp) begin failures++; $display("hits %0d of %0d", chk.nhits, chk.nexp); end
    // phase 2: b masked
    chk = new();
    chk.first_pkg = 10;
    b_mask = 1;
    chk.gen(10, 3, 1, qa);
    chk.gen(10, 3, 2, qb);   // must be ignored
    qb.delete();
    repeat (3) @(negedge clk);
    checks++;
    if (out_mask) begin failures++; $display("mask propagated wrongly"); end
    wait (qa.size() == 0);
    repeat (5) @(negedge clk);
    checks += chk.checks + 1; failures += chk.failures;
    if (chk.npkg != 1 || chk.nhits == 0) begin failures++; $display("masked pass-through failed"); end
    // phase 3: both masked
    a_mask = 1;
    @(negedge clk);
    checks++;
    if (!out_mask) begin failures++; $display("out_mask not set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
