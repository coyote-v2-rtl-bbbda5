// tb_writeback_unit: drives completion pulses for three vFPGAs and checks
// that every counter reaches host memory at base + 4*(2*vfid + wr) with its
// final value, that nothing is written while disabled, and that simultaneous
// completions are all counted.
// Counters written to host memory follow the paper's write-back; the
// address layout is this design's. Host memory is a testbench array.
module tb_writeback_unit;
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
  localparam int NR = 3;
  logic enable, wb_valid, wb_ready;
  logic [47:0] base, wb_addr;
  logic [31:0] wb_data;
  logic [NR-1:0][3:0] cpl_valid, cpl_wr;
  logic [2*NR-1:0][31:0] counters;
  writeback_unit #(.N_REG(NR)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end
  logic [31:0] mem [2*NR];
  int expect_c [2*NR];
  always @(posedge clk) if (wb_valid && wb_ready) begin
    automatic int idx = int'((wb_addr - base) >> 2);
    if (idx >= 0 && idx < 2*NR && wb_addr[1:0] == 0) mem[idx] <= wb_data;
    else begin $display("FAIL: write-back to bad address %h", wb_addr); failures++; end
  end
  initial begin
    enable = 0; base = 48'h0000_1234_5000; wb_ready = 1; cpl_valid = '0; cpl_wr = '0;
    for (int i = 0; i < 2*NR; i++) mem[i] = 32'hdead;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); cpl_valid[0] = 4'b0001; @(negedge clk); cpl_valid = '0; expect_c[0] = 1;
    repeat (5) @(negedge clk);
    check(!wb_valid && mem[0] == 32'hdead, "disabled: no write-back");
    enable = 1;
    for (int c = 0; c < 300; c++) begin
      @(negedge clk);
      wb_ready = $urandom % 3 != 0;
      for (int r = 0; r < NR; r++) begin
        cpl_valid[r] = 4'($urandom); cpl_wr[r] = 4'($urandom);
        for (int k = 0; k < 4; k++) if (cpl_valid[r][k]) expect_c[2*r + cpl_wr[r][k]]++;
      end
    end
    @(negedge clk); cpl_valid = '0; wb_ready = 1;
    repeat (20) @(negedge clk);
    for (int i = 0; i < 2*NR; i++) begin
      check(counters[i] == 32'(expect_c[i]), $sformatf("counter %0d value", i));
      check(mem[i] == 32'(expect_c[i]), $sformatf("host copy of counter %0d: %0d vs %0d", i, mem[i], expect_c[i]));
    end
    finish();
  end
endmodule
