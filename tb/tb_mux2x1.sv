// Checks MUX 2x1: two randomly filled sources; every record must come out
// once, in source order, at most one per cycle, and with both sources
// always ready the grants must alternate.
module tb_mux2x1;
  import mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_valid, a_ready, b_valid, b_ready, out_valid;
  rec1_t a_rec, b_rec, out_rec;
  rec1_t qa[$], qb[$], ea[$], eb[$];
  int na = 0, nb = 0, alt_bad = 0, last_src = -1, both_phase = 0;

  mux2x1 dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign a_valid = qa.size() > 0;
  assign b_valid = qb.size() > 0;
  assign a_rec   = a_valid ? qa[0] : '0;
  assign b_rec   = b_valid ? qb[0] : '0;

  always @(posedge clk) if (!rst) begin
    if (out_valid) begin
      rec1_t e;
      int src;
      checks++;
      src = (out_rec.asic == 4'd1) ? 0 : 1;
      if (src == 0) begin
        if (ea.size() == 0) begin failures++; end else begin e = ea.pop_front(); na++; end
      end else begin
        if (eb.size() == 0) begin failures++; end else begin e = eb.pop_front(); nb++; end
      end
      if (e !== out_rec) begin failures++; if (failures < 5) $display("order/content error"); end
      if (both_phase && last_src == src) alt_bad++;
      last_src = src;
    end
  end

  // pop what the DUT took at this edge, after the edge
  always @(posedge clk) if (!rst) begin
    bit pa, pb;
    pa = a_ready; pb = b_ready;
    #1;
    if (pa) void'(qa.pop_front());
    if (pb) void'(qb.pop_front());
  end

  function automatic rec1_t mk(input int src);
    rec1_t r;
    r = rec1_t'($urandom);
    r.asic = (src == 0) ? 4'd1 : 4'd2;
    return r;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // random phase
    repeat (3000) begin
      @(negedge clk);
      if ($urandom_range(0, 2) == 0) begin rec1_t r; r = mk(0); qa.push_back(r); ea.push_back(r); end
      if ($urandom_range(0, 2) == 0) begin rec1_t r; r = mk(1); qb.push_back(r); eb.push_back(r); end
    end
    repeat (3000) @(negedge clk);
    // both sources full: strict alternation
    for (int i = 0; i < 200; i++) begin
      rec1_t r;
      r = mk(0); qa.push_back(r); ea.push_back(r);
      r = mk(1); qb.push_back(r); eb.push_back(r);
    end
    repeat (3) @(negedge clk);
    both_phase = 1;
    repeat (380) @(negedge clk);
    both_phase = 0;
    repeat (50) @(negedge clk);
    checks++;
    if (ea.size() != 0 || eb.size() != 0) begin failures++; $display("records left"); end
    checks++;
    if (alt_bad != 0) begin failures++; $display("no alternation %0d", alt_bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
