// tb_packetizer: random requests are cut into packets; checks that packets
// are contiguous, at most 4 KB, never cross a 4 KB boundary, add up to the
// request, carry 'last' only on the final packet, and that one packet leaves
// per cycle when the consumer is always ready.
// The 4 KB packet size is the paper's default. Expected packets are worked
// out by the testbench from the request, one packet per cycle. Watchdog included.
module tb_packetizer;
  import coyote_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  logic in_valid, in_ready, out_valid, out_ready;
  dreq_t in_req, out_req;
  packetizer dut (.*);
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end
  initial begin
    in_valid = 0; in_req = '0; out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      automatic logic [47:0] a = 48'($urandom) << 6;
      automatic int len = (r == 0) ? 4096 : (r == 1) ? 64 : (r == 2) ? 3*4096 : 64 * (1 + $urandom % 400);
      automatic logic [47:0] exp_a = a;
      automatic int left = len, npk = 0, cyc0 = 0, cyc1 = 0;
      if (r == 0 || r == 2) a = 48'h1000 * 48'(r + 1);
      exp_a = a;
      @(negedge clk);
      in_valid = 1; in_req = '0; in_req.addr = a; in_req.len = 28'(len); in_req.dest = 4'(r); in_req.wr = r[0];
      @(negedge clk); in_valid = 0;
      out_ready = (r < 30);
      while (left > 0) begin
        if (!out_ready) begin @(negedge clk); out_ready = $urandom % 2; continue; end
        check(out_valid, "packet available");
        check(out_req.addr == exp_a, "contiguous packets");
        check(out_req.len <= 4096 && out_req.len > 0, "packet size <= 4 KB");
        check((out_req.addr >> 12) == ((out_req.addr + out_req.len - 1) >> 12), "no 4 KB crossing");
        check(out_req.last == (int'(out_req.len) == left), "last only on final packet");
        check(out_req.dest == 4'(r) && out_req.wr == r[0], "fields kept");
        exp_a += 48'(out_req.len); left -= int'(out_req.len); npk++;
        @(negedge clk); out_ready = (r < 30) ? 1 : $urandom % 2;
      end
      if (r == 2) check(npk == 3, "12 KB aligned request gives 3 packets in 3 cycles");
      out_ready = 1;
      check(!out_valid, "no extra packet");
    end
    finish();
  end
endmodule
