// tb_crediter: with 2 credits per stream, checks that reads pass until the
// credits of their (service, stream) are used up and then stall without
// affecting other streams, that completions return credits, that a write
// passes only when its data already wait in the write queue (and reserved
// beats are not promised twice), and that network writes need no data.
// The credit count of 2 is this design's choice (the paper gives none);
// expected grants come from counters kept in the testbench. Watchdog included.
module tb_crediter;
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
  localparam int ND = 4;
  logic in_valid, in_ready, out_valid, out_ready, stall;
  dreq_t in_req, out_req;
  logic [0:0] cpl_valid; cq_t [0:0] cpl;
  logic [2:0][ND-1:0][15:0] wq_beats;
  logic [2:0][ND-1:0] wq_pop;
  crediter #(.N_DEST(ND), .CRED(2), .N_CPL(1)) dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end
  function automatic dreq_t mk(input strm_e s, input int d, input logic wr, input int len);
    dreq_t r; r = '0; r.strm = s; r.dest = 4'(d); r.wr = wr; r.len = 28'(len); return r;
  endfunction
  // present a request for one cycle, return whether it was accepted
  task automatic offer(input dreq_t r, output logic took);
    @(negedge clk); in_valid = 1; in_req = r; #1;
    took = in_ready;
    if (out_ready) begin
      check(out_valid == in_ready && out_req == r, "passes unchanged when accepted");
      check(stall == !took, "stall flag");
    end else check(!stall && out_valid && !took, "credit present, held by downstream");
    @(negedge clk); in_valid = 0;
  endtask
  task automatic complete(input strm_e s, input int d, input logic wr);
    @(negedge clk); cpl_valid = 1; cpl[0] = '{strm: s, dest: 4'(d), wr: wr};
    @(negedge clk); cpl_valid = 0;
  endtask
  logic t;
  initial begin
    in_valid = 0; in_req = '0; out_ready = 1; cpl_valid = 0; cpl = '0; wq_beats = '0; wq_pop = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    offer(mk(STRM_HOST, 1, 0, 4096), t); check(t, "read 1 passes");
    offer(mk(STRM_HOST, 1, 0, 4096), t); check(t, "read 2 passes");
    offer(mk(STRM_HOST, 1, 0, 4096), t); check(!t, "read 3 stalls: no credit");
    offer(mk(STRM_HOST, 2, 0, 4096), t); check(t, "other stream unaffected");
    offer(mk(STRM_CARD, 1, 0, 4096), t); check(t, "other service unaffected");
    complete(STRM_HOST, 1, 0);
    offer(mk(STRM_HOST, 1, 0, 4096), t); check(t, "credit returned by completion");
    offer(mk(STRM_HOST, 1, 0, 4096), t); check(!t, "and used again");
    // writes
    offer(mk(STRM_HOST, 0, 1, 4096), t); check(!t, "write without data stalls");
    wq_beats[STRM_HOST][0] = 16'd100;
    offer(mk(STRM_HOST, 0, 1, 4096), t); check(t, "write with 64 beats queued passes");
    offer(mk(STRM_HOST, 0, 1, 4096), t); check(!t, "36 unreserved beats are not enough for 64");
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); wq_pop[STRM_HOST][0] = 1; wq_beats[STRM_HOST][0] -= 1;
    end
    @(negedge clk); wq_pop = '0; wq_beats[STRM_HOST][0] = 16'd64;
    offer(mk(STRM_HOST, 0, 1, 4096), t); check(t, "after the first write drained, the next passes");
    offer(mk(STRM_HOST, 0, 1, 64), t); check(!t, "write credits exhausted");
    complete(STRM_HOST, 0, 1);
    wq_beats[STRM_HOST][0] = 16'd65;
    offer(mk(STRM_HOST, 0, 1, 64), t); check(t, "write credit returned");
    offer(mk(STRM_NET, 0, 1, 4096), t); check(t, "network write needs no queued data");
    out_ready = 0;
    offer(mk(STRM_NET, 3, 0, 64), t); check(!t, "downstream back-pressure holds request");
    finish();
  end
endmodule
