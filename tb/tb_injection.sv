// Checks the injection switch: a random farm-hit stream with busy and idle
// stretches passes through unchanged and in order; hits requested by the
// host (marked by a distinctive x coordinate) must appear exactly once, in
// the first idle input cycle after the request, carrying the frame number
// of the last stream hit before them. Requests made while one is pending
// must be ignored.
module tb_injection;
  import mu3e_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic inj_req, inj_busy, in_valid, out_valid;
  xyz_t inj_pos;
  logic [15:0] inj_cnt;
  farm_hit_t in_hit, out_hit;

  injection dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  farm_hit_t inq[$];
  int        injq[$];      // serial numbers of accepted requests
  int        accepted = 0, seen_inj = 0;
  logic [31:0] last_ts = 0;
  logic      idle_prev = 0;  // input was idle in the cycle that produced this output
  logic      pending = 0;

  // output monitor
  always @(posedge clk) if (!rst) begin
    if (out_valid) begin
      if (out_hit.pos.x[31:16] == 16'hDEAD) begin
        checks += 2;
        seen_inj++;
        if (injq.size() == 0 || out_hit.pos.x[15:0] != 16'(injq[0])) begin
          failures++; $display("unexpected injected hit %h", out_hit.pos.x);
        end else void'(injq.pop_front());
        if (out_hit.ts != last_ts || out_hit.eop) begin
          failures++; $display("injected ts %0d, expected %0d", out_hit.ts, last_ts);
        end
        if (!idle_prev) begin failures++; $display("injection in a busy cycle"); end
      end else begin
        checks++;
        if (inq.size() == 0 || out_hit !== inq[0]) begin
          failures++; $display("stream mismatch %h", out_hit);
        end else void'(inq.pop_front());
        if (!out_hit.eop) last_ts = out_hit.ts;
      end
    end
    idle_prev = !in_valid;
  end

  initial begin
    int ts = 0;
    inj_req = 0; in_valid = 0; in_hit = '0; inj_pos = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 20000; i++) begin
      int phase;
      phase = (i / 200) % 3;      // busy stretches, mixed, mostly idle
      in_valid = (phase == 0) ? 1'b1 : (phase == 1) ? 1'($urandom_range(0, 1)) : 1'($urandom_range(0, 9) == 0);
      if (in_valid) begin
        in_hit.eop = ($urandom_range(0, 30) == 0);
        ts += $urandom_range(0, 2);
        in_hit.ts = 32'(ts);
        in_hit.pos = '{x: 32'($urandom & 32'h7FFF_FFFF), y: 32'($urandom), z: 32'($urandom)};
        inq.push_back(in_hit);
      end
      inj_req = ($urandom_range(0, 40) == 0);
      inj_pos = '{x: {16'hDEAD, 16'(accepted)}, y: 32'(i), z: 32'd0};
      if (inj_req && !inj_busy) begin
        injq.push_back(accepted);
        accepted++;
      end
      @(negedge clk);
    end
    in_valid = 0; inj_req = 0;
    repeat (10) @(negedge clk);
    checks += 3;
    if (inq.size() != 0) begin failures++; $display("%0d stream hits lost", inq.size()); end
    if (injq.size() != 0) begin failures++; $display("%0d injections lost", injq.size()); end
    if (inj_cnt != 16'(accepted)) begin failures++; $display("inj_cnt %0d vs %0d", inj_cnt, accepted); end
    $display("accepted injections %0d", accepted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
