// tb_icap_ctrl: streams a generated bitstream of 1000 bytes and checks that
// exactly 250 32-bit words reach the ICAP in order, one per cycle while
// data are available (16 cycles per 512-bit beat, i.e. 4 bytes per cycle:
// 800 MB/s at 200 MHz), and that done pulses once at the end.
// The 800 MB/s target is the paper's figure; the 200 MHz ICAP clock is an
// assumption. Expected words are recomputed from the generated bytes.
module tb_icap_ctrl;
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
  logic start, s_valid, s_ready, icap_csib, icap_rdwrb, busy, done;
  logic [31:0] length, icap_i;
  logic [511:0] s_data;
  icap_ctrl dut (.*);
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end
  function automatic logic [31:0] word(input int i);
    return 32'(i) * 32'h9e3779b1 ^ 32'h5a5a0000;
  endfunction
  int nw = 0, beat = 0, dones = 0, first = -1, lastc = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && !icap_csib) begin
      if (!icap_rdwrb) begin
        if (icap_i != word(nw)) begin failures++; $display("FAIL: word %0d", nw); end
        if (first < 0) first = cyc;
        lastc = cyc;
        nw++;
      end
    end
    if (done) dones++;
    if (s_valid && s_ready) beat <= beat + 1;
  end
  always_comb for (int k = 0; k < 16; k++) s_data[32*k +: 32] = word(16*beat + k);
  initial begin
    start = 0; length = 0; s_valid = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; length = 1000;
    @(negedge clk); start = 0; s_valid = 1;
    check(busy, "busy after start");
    while (!done) @(negedge clk);
    s_valid = 0;
    repeat (5) @(negedge clk);
    check(nw == 250, $sformatf("%0d words written, expected 250", nw));
    check(dones == 1 && !busy, "one done pulse, idle after");
    // 16 beats: words in 16 cycles of each 17 (one cycle to load a beat)
    check(lastc - first + 1 <= 250 + 16, $sformatf("%0d cycles for 250 words", lastc - first + 1));
    finish();
  end
endmodule
