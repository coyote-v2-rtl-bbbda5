// tb_irq_ctrl: raises interrupts from several sources at once and checks that
// each is delivered once with its own vector and value, round-robin, that a
// busy source reports not-ready, and that back-pressure holds the message.
// Interrupt sources are the paper's (page fault, reconfiguration, TLB
// invalidation, user); vector numbering is this design's. Watchdog included.
module tb_irq_ctrl;
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
  localparam int N = 8;
  logic [N-1:0] src_valid, src_ready;
  logic [N-1:0][63:0] src_value;
  logic irq_valid, irq_ready;
  logic [7:0] irq_vector;
  logic [63:0] irq_value;
  irq_ctrl #(.N_SRC(N)) dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end
  int got [N];
  initial begin
    src_valid = '0; src_value = '0; irq_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    src_valid = 8'b1010_0110;
    for (int i = 0; i < N; i++) src_value[i] = 64'h1000 + 64'(i);
    @(negedge clk); src_valid = '0;
    check(src_ready == 8'b0101_1001, "busy sources not ready");
    repeat (3) @(negedge clk);
    check(irq_valid && irq_vector == 1, "held under back-pressure, lowest first after reset");
    irq_ready = 1;
    for (int k = 0; k < 4; k++) begin
      #1;
      check(irq_valid, "message present");
      check(irq_value == 64'h1000 + 64'(irq_vector), "value matches vector");
      check(irq_vector == (k == 0 ? 1 : k == 1 ? 2 : k == 2 ? 5 : 7), "round-robin order 1,2,5,7");
      got[irq_vector]++;
      @(negedge clk);
    end
    check(!irq_valid, "each delivered once");
    // the round-robin pointer now sits after 7: a new 1 and 7 go 1 then 7
    src_valid = 8'b1000_0010; src_value[1] = 64'd11; src_value[7] = 64'd77;
    @(negedge clk); src_valid = '0; #1;
    check(irq_vector == 1 && irq_value == 11, "next after 7 is 1");
    @(negedge clk); #1;
    check(irq_vector == 7 && irq_value == 77, "then 7");
    finish();
  end
endmodule
