// tb_tlb: fills the TLB through the driver port and checks hits, misses,
// the translated address (frame + page offset), one-cycle lookup latency,
// round-robin replacement in a full set, overwrite of an existing entry and
// invalidation, against a reference list of installed translations.
// Set-associative lookup with a driver fallback on a miss is the paper's;
// 16 sets x 4 ways, 2 MB pages and round-robin replacement are this design's.
module tb_tlb;
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
  localparam int PB = 21, SETS = 16, WAYS = 4;
  logic lk_valid, lk_ready, rs_valid, rs_hit, wr_valid, wr_inval, inv_done;
  logic [47:0] lk_vaddr, rs_paddr, wr_vaddr, wr_paddr;
  tlb #(.PAGE_BITS(PB), .SETS(SETS), .WAYS(WAYS)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end
  task automatic install(input logic [47:0] va, input logic [47:0] pa, input logic inval);
    @(negedge clk); wr_valid = 1; wr_vaddr = va; wr_paddr = pa; wr_inval = inval;
    @(negedge clk); wr_valid = 0;
  endtask
  task automatic lookup(input logic [47:0] va, output logic hit, output logic [47:0] pa);
    @(negedge clk); lk_valid = 1; lk_vaddr = va;
    @(negedge clk); lk_valid = 0;
    check(rs_valid, "result one cycle after lookup");
    hit = rs_hit; pa = rs_paddr;
  endtask
  // page number with a given set and tag
  function automatic logic [47:0] va_of(input int set, input int tag, input int off);
    return (48'(tag) << (PB + 4)) | (48'(set) << PB) | 48'(off);
  endfunction
  logic h; logic [47:0] p;
  initial begin
    lk_valid = 0; wr_valid = 0; wr_inval = 0; lk_vaddr = '0; wr_vaddr = '0; wr_paddr = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    lookup(va_of(3, 7, 123), h, p); check(!h, "empty TLB misses");
    // 5 pages in set 3: the fifth replaces the first (round-robin)
    for (int t = 0; t < 5; t++) install(va_of(3, t + 1, 0), 48'(t + 100) << PB, 0);
    lookup(va_of(3, 1, 77), h, p); check(!h, "oldest way replaced");
    for (int t = 1; t < 5; t++) begin
      lookup(va_of(3, t + 1, 64*t + 5), h, p);
      check(h && p == ((48'(t + 100) << PB) | 48'(64*t + 5)), $sformatf("hit and translation, page %0d", t));
    end
    lookup(va_of(4, 2, 0), h, p); check(!h, "other set misses");
    install(va_of(3, 3, 0), 48'd999 << PB, 0);
    lookup(va_of(3, 3, 9), h, p); check(h && p == ((48'd999 << PB) | 9), "overwrite existing entry");
    install(va_of(3, 3, 0), '0, 1);
    check(inv_done, "invalidation acknowledged");
    lookup(va_of(3, 3, 9), h, p); check(!h, "invalidated entry misses");
    lookup(va_of(3, 4, 1), h, p); check(h, "other entries kept");
    finish();
  end
endmodule
