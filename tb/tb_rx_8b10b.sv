// Checks comma alignment and decoding of the link receiver: a random byte
// stream with control characters is encoded, shifted by a random number of
// bits and cut into 10-bit words; the decoded bytes must match in order.
module tb_rx_8b10b;
  import tb_mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [9:0] rx_word;
  logic locked, valid, k, err;
  logic [7:0] data;

  rx_8b10b dut (.*);

  bit   bits[$];
  logic [8:0] sent[$];   // {k, data}
  logic rd;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push(input logic [7:0] d, input logic kk, input bit record);
    logic [9:0] s;
    s = enc8b10b(d, kk, rd);
    for (int i = 9; i >= 0; i--) bits.push_back(s[i]);
    if (record) sent.push_back({kk, d});
  endtask

  initial begin
    int off, nout, got_first;
    logic [8:0] exp;
    rd = 0;
    off = $urandom_range(1, 9);
    for (int i = 0; i < off; i++) bits.push_back(1'b0);
    for (int i = 0; i < 6; i++) push(8'hBC, 1, 0);
    for (int i = 0; i < 1500; i++) begin
      int r;
      r = $urandom_range(0, 19);
      if (r == 0)      push(8'h1C, 1, 1);
      else if (r == 1) push(8'h9C, 1, 1);
      else             push(8'($urandom), 0, 1);
    end
    for (int i = 0; i < 10; i++) push(8'hBC, 1, 0);
    rx_word = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    nout = 0; got_first = 0;
    while (bits.size() >= 10) begin
      @(negedge clk);
      for (int i = 9; i >= 0; i--) rx_word[i] = bits.pop_front();
      if (valid && !(got_first == 0 && k && data == 8'hBC)) begin
        got_first = 1;
        if (sent.size() > 0) begin
          exp = sent.pop_front();
          checks++;
          if ({k, data} !== exp || err) begin
            failures++;
            if (failures < 10) $display("mismatch: got k=%0d %h err=%0d exp %h", k, data, err, exp);
          end
          nout++;
        end
      end
    end
    checks++;
    if (nout != 1500 || !locked) begin
      failures++;
      $display("decoded %0d of 1500 bytes, locked=%0d", nout, locked);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
