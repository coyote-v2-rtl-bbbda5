// tb_mem_striping: checks the channel and in-channel address of each piece
// against the stripe mapping (channel = block mod 32, block / 32 kept), that
// a request spanning stripes is cut at stripe boundaries and that 'last'
// lands on the final piece of the final packet only.
// Striping across HBM channels is the paper's; 32 channels and 4 KB stripes
// are this design's defaults. Expected pieces come from a separate loop model.
module tb_mem_striping;
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
  logic in_valid, in_ready, out_valid, out_ready, out_pkt_end;
  dreq_t in_req, out_req;
  logic [4:0] out_chan;
  mem_striping dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end
  initial begin
    in_valid = 0; in_req = '0; out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 80; r++) begin
      automatic logic [47:0] a = (48'($urandom) << 6) & 48'h0fff_ffff_ffc0;
      automatic int len = 64 * (1 + $urandom % 200);
      automatic int left = len;
      automatic logic lst = r[0];
      @(negedge clk);
      in_valid = 1; in_req = '0; in_req.addr = a; in_req.len = 28'(len); in_req.last = lst;
      @(negedge clk); in_valid = 0;
      while (left > 0) begin
        automatic logic [47:0] blk = a >> 12;
        check(out_valid, "piece present");
        check(out_chan == 5'(blk % 32), "channel = block mod 32");
        check(out_req.addr == (((blk / 32) << 12) | (a & 48'hfff)), "address inside channel");
        check(out_req.len == 28'((left < 4096 - int'(a & 48'hfff)) ? left : 4096 - int'(a & 48'hfff)), "cut at stripe");
        left -= int'(out_req.len); a += 48'(out_req.len);
        check(out_pkt_end == (left == 0) && out_req.last == (lst && left == 0), "end and last flags");
        @(negedge clk);
      end
    end
    finish();
  end
endmodule
