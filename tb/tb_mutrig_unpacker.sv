// Checks the unpacker: frames of random MuTRiG hits framed by K28.0/K28.4
// with idles in between must come out as Rec1 records with the right
// fields; bytes outside a frame and a truncated hit must be counted.
module tb_mutrig_unpacker;
  import mu3e_pkg::*;
  import tb_mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_k, in_err, rec_valid;
  logic [7:0] in_data;
  rec1_t rec;
  logic [15:0] drop_cnt;
  rec1_t expq[$];

  mutrig_unpacker #(.ASIC_ID(4'd5)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [7:0] d, input logic k);
    @(negedge clk);
    in_valid = 1; in_data = d; in_k = k; in_err = 0;
    @(negedge clk);
    in_valid = 0;
  endtask

  always @(posedge clk) if (!rst && rec_valid) begin
    rec1_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected record"); end
    else begin
      e = expq.pop_front();
      if (rec !== e) begin failures++; $display("got %p exp %p", rec, e); end
    end
  end

  initial begin
    in_valid = 0; in_data = 0; in_k = 0; in_err = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    send(8'h42, 0);                  // outside a frame: dropped
    for (int f = 0; f < 200; f++) begin
      int n;
      n = $urandom_range(0, 4);
      send(K28_0, 1);
      for (int h = 0; h < n; h++) begin
        logic [47:0] w;
        rec1_t e;
        e.asic = 4'd5; e.channel = 5'($urandom); e.tcc = 15'($urandom);
        e.tfine = 5'($urandom); e.eflag = 1'($urandom);
        w = mutrig_hit(e.channel, e.tcc, e.tfine, e.eflag);
        expq.push_back(e);
        for (int b = 5; b >= 0; b--) send(w[8*b +: 8], 0);
      end
      send(K28_4, 1);
      send(K28_5, 1);
    end
    send(K28_0, 1); send(8'h11, 0); send(8'h22, 0); send(K28_4, 1);   // truncated hit
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d records missing", expq.size()); end
    checks++;
    if (drop_cnt != 16'd2) begin failures++; $display("drop_cnt %0d, expected 2", drop_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
