// Checks PRBS T: the initialisation walk must take 2^15-1 cycles, after
// which every LFSR state presented on either port is translated to its
// position in the sequence, one cycle later; hits during the walk are
// dropped and counted.
module tb_prbs_lut;
  import mu3e_pkg::*;
  import tb_mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic init_done, a_valid, b_valid, a_out_valid, b_out_valid;
  rec1_t a_rec, b_rec, a_out, b_out;
  logic [15:0] drop_cnt;
  logic [14:0] st [32767];

  prbs_lut dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, pa, pb;
    lfsr_table(st);
    a_valid = 0; b_valid = 0; a_rec = '0; b_rec = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    a_valid = 1;                     // dropped during the walk
    @(negedge clk);
    a_valid = 0;
    cyc = 1;
    while (!init_done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < 32767 || cyc > 32769) begin failures++; $display("walk took %0d cycles", cyc); end
    checks++;
    if (drop_cnt != 1) begin failures++; $display("drop_cnt %0d", drop_cnt); end
    for (int i = 0; i < 4000; i++) begin
      pa = (i < 2) ? i * 32766 : $urandom_range(0, 32766);
      pb = $urandom_range(0, 32766);
      a_valid = 1; b_valid = 1;
      a_rec = rec1_t'($urandom); b_rec = rec1_t'($urandom);
      a_rec.tcc = st[pa]; b_rec.tcc = st[pb];
      @(negedge clk);
      checks++;
      if (!a_out_valid || !b_out_valid || a_out.tcc != 15'(pa) || b_out.tcc != 15'(pb) ||
          a_out.channel != a_rec.channel || b_out.asic != b_rec.asic) begin
        failures++;
        if (failures < 5) $display("pos %0d/%0d got %0d/%0d", pa, pb, a_out.tcc, b_out.tcc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
