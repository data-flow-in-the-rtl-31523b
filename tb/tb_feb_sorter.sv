// Checks the sorter with a reduced window (64 slots, 4 hits per slot,
// delay 32): random hits up to 30 cycles old on both inputs must all come
// out once, framed as SOP / 128 SUB / hits / EOP per 2^11 timestamps, in
// time order and with the right time bits; each SOP must leave DELAY
// cycles after its package began, within the reader's catch-up slack.
// A burst into one slot and a too-old hit exercise the loss counters.
module tb_feb_sorter;
  import mu3e_pkg::*;
  localparam int SB = 6, SD = 4, DL = 32;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] now;
  logic a_valid, b_valid, out_valid;
  sort_hit_t a_hit, b_hit;
  pkt_word_t out_word;
  logic [15:0] late_cnt, full_cnt;
  int exp_cnt [longint];
  int nexp = 0, nout = 0;

  feb_sorter #(.SLOT_BITS(SB), .SLOT_DEPTH(SD), .DELAY(DL)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst) now <= 0; else now <= now + 1;

  // output parser
  int   pkg = -1, sub = -1, nsub = 0, in_pkg = 0, last_t = -1, nsop = 0;
  always @(posedge clk) if (!rst && out_valid) begin
    unique case (out_word.kind)
      W_SOP: begin
        checks++;
        if (in_pkg || int'(out_word.data) != pkg + 1) begin failures++; $display("bad SOP %0d", out_word.data); end
        // package p starts at time p*2048 and is read DELAY cycles later
        checks++;
        if (int'(now) < int'(out_word.data) * 2048 + DL || int'(now) > int'(out_word.data) * 2048 + DL + 40) begin
          failures++; $display("SOP %0d at cycle %0d", out_word.data, now);
        end
        pkg = int'(out_word.data); in_pkg = 1; sub = -1; nsub = 0; last_t = -1; nsop++;
      end
      W_SUB: begin
        checks++;
        if (!in_pkg || int'(out_word.data) != sub + 1) begin failures++; $display("bad SUB %0d after %0d", out_word.data, sub); end
        sub = int'(out_word.data); nsub++;
      end
      W_EOP: begin
        checks++;
        if (!in_pkg || nsub != 128) begin failures++; $display("EOP after %0d SUBs", nsub); end
        in_pkg = 0;
      end
      W_HIT: begin
        longint key;
        int t;
        t = pkg * 2048 + sub * 16 + int'(out_word.data[31:28]);
        key = (longint'(t % 32768) << 28) | longint'(out_word.data[27:0]);
        checks++;
        if (!in_pkg || t < last_t || !exp_cnt.exists(key) || exp_cnt[key] == 0) begin
          failures++; if (failures < 10) $display("unexpected hit t=%0d", t);
        end else exp_cnt[key]--;
        last_t = t; nout++;
      end
    endcase
  end

  function automatic sort_hit_t mk(input int age);
    sort_hit_t h;
    h.ts = 15'(int'(now) - age);
    h.payload = 28'($urandom);
    return h;
  endfunction

  task automatic expect_hit(input sort_hit_t h);
    longint key;
    key = (longint'(h.ts) << 28) | longint'(h.payload);
    if (exp_cnt.exists(key)) exp_cnt[key]++; else exp_cnt[key] = 1;
    nexp++;
  endtask

  initial begin
    a_valid = 0; b_valid = 0; a_hit = '0; b_hit = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (40) @(negedge clk);
    for (int i = 0; i < 6500; i++) begin
      a_valid = ($urandom_range(0, 3) == 0);
      b_valid = ($urandom_range(0, 3) == 0);
      a_hit = mk($urandom_range(0, 29));
      b_hit = mk($urandom_range(0, 29));
      if (i > 2960 && i < 3040) begin a_valid = 0; b_valid = 0; end
      if (i == 3000) begin     // burst: 6 hits into one slot
        a_valid = 1; b_valid = 1; a_hit = mk(10); b_hit = a_hit; b_hit.payload = 28'h1;
      end
      if (i == 3001 || i == 3002) begin
        a_valid = 1; b_valid = 1; a_hit = mk(i - 2990); b_hit = a_hit; a_hit.payload = 28'(i); b_hit.payload = 28'(i + 7);
      end
      if (i == 4000) begin a_valid = 1; a_hit = mk(DL + 5); b_valid = 0; end   // too old
      // of the six burst hits the first four fit into the slot
      if (a_valid && i != 4000 && i != 3002) expect_hit(a_hit);
      if (b_valid && i != 3002) expect_hit(b_hit);
      @(negedge clk);
    end
    a_valid = 0; b_valid = 0;
    repeat (2200) @(negedge clk);
    checks++;
    // 4 of the 6 burst hits fit in the slot; the remaining 2 are counted
    // random traffic may overflow a slot now and then; the burst must add two
    if (full_cnt < 2 || late_cnt != 1) begin failures++; $display("full %0d late %0d", full_cnt, late_cnt); end
    checks++;
    if (nout != nexp - (int'(full_cnt) - 2)) begin failures++; $display("out %0d expected %0d", nout, nexp); end
    checks++;
    if (nsop < 3) begin failures++; $display("only %0d packages", nsop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
