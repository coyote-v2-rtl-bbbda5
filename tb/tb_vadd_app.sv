// tb_vadd_app: random operand streams with random stalls on both inputs and
// the output; checks every sum beat element by element, the last flag and
// that full rate (one beat per cycle) is reached when nothing stalls.
// Vector addition is one of the paper's example kernels; the 32-bit lane
// width is this design's. Expected sums are computed in the testbench.
module tb_vadd_app;
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
  logic a_valid, a_ready, b_valid, b_ready, y_valid, y_ready;
  beat_t a, b, y;
  vadd_app dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end
  function automatic logic [511:0] opnd(input int i, input int which);
    logic [511:0] v;
    for (int k = 0; k < 16; k++) v[32*k +: 32] = 32'(i * 7919 + k * 104729 + which * 15485863) * 32'h01000193;
    return v;
  endfunction
  int ai = 0, bi = 0, yi = 0, N = 200, t_first = 0, t_last = 0, cyc = 0;
  logic stalls;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (a_valid && a_ready) ai++;
      if (b_valid && b_ready) bi++;
      if (y_valid && y_ready) begin
        automatic logic [511:0] e;
        for (int k = 0; k < 16; k++) e[32*k +: 32] = opnd(yi, 0)[32*k +: 32] + opnd(yi, 1)[32*k +: 32];
        checks++;
        if (y.data != e || y.last != (yi % 10 == 9)) begin failures++; $display("FAIL: beat %0d", yi); end
        if (yi == 100) t_first = cyc;
        if (yi == 199) t_last = cyc;
        yi++;
      end
    end
  end
  always_comb begin
    a.data = opnd(ai, 0); a.last = (ai % 10 == 9); a.tid = '0;
    b.data = opnd(bi, 1); b.last = 1'b0; b.tid = '0;
  end
  initial begin
    a_valid = 0; b_valid = 0; y_ready = 0; stalls = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    while (yi < N) begin
      @(negedge clk);
      stalls = (yi < 100);
      a_valid = (ai < N) && (!stalls || $urandom % 3 != 0);
      b_valid = (bi < N) && (!stalls || $urandom % 3 != 0);
      y_ready = !stalls || ($urandom % 4 != 0);
    end
    check(t_last - t_first == 99, $sformatf("full rate: 100 beats in %0d cycles", t_last - t_first + 1));
    finish();
  end
endmodule
