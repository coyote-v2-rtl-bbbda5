// tb_axil_regs: writes and reads the register file through AXI4-Lite and
// checks stored values, byte strobes, write pulses, read-only status
// registers and the one-cycle response timing.
// Expected values come from a shadow copy kept by the testbench. The
// register map is this design's own; the paper only names the control bus.
module tb_axil_regs;
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
  axil_req_t axi_req; axil_rsp_t axi_rsp;
  logic [3:0][63:0] regs, status; logic [3:0] wr_pulse;
  axil_regs #(.N_REGS(4), .RO_MASK(4'b1000)) dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end
  int pulses [4];
  always @(posedge clk) for (int i = 0; i < 4; i++) if (wr_pulse[i]) pulses[i]++;
  task automatic wr(input int idx, input logic [63:0] d, input logic [7:0] strb);
    @(negedge clk);
    axi_req.awvalid = 1; axi_req.wvalid = 1; axi_req.awaddr = 16'(8*idx); axi_req.wdata = d; axi_req.wstrb = strb;
    #1 check(axi_rsp.awready && axi_rsp.wready, "write accepted at once");
    @(negedge clk); axi_req.awvalid = 0; axi_req.wvalid = 0;
    check(axi_rsp.bvalid && axi_rsp.bresp == 0, "write response next cycle");
    @(negedge clk);
  endtask
  task automatic rd(input int idx, output logic [63:0] d);
    @(negedge clk); axi_req.arvalid = 1; axi_req.araddr = 16'(8*idx);
    @(negedge clk); axi_req.arvalid = 0;
    check(axi_rsp.rvalid, "read data next cycle");
    d = axi_rsp.rdata;
    @(negedge clk);
  endtask
  logic [63:0] d;
  initial begin
    axi_req = '0; axi_req.bready = 1; axi_req.rready = 1; status = '0; status[3] = 64'hfeed_beef;
    repeat (3) @(posedge clk); rst_n = 1;
    wr(0, 64'h0123_4567_89ab_cdef, 8'hff);
    wr(1, 64'h1111_2222_3333_4444, 8'hff);
    wr(1, 64'hffff_ffff_ffff_ffff, 8'h0f);
    wr(3, 64'h5, 8'hff);
    rd(0, d); check(d == 64'h0123_4567_89ab_cdef, "reg 0 read back");
    rd(1, d); check(d == 64'h1111_2222_ffff_ffff && regs[1] == d, "byte strobes");
    rd(3, d); check(d == 64'hfeed_beef, "status register read");
    rd(9, d); check(d == 0, "outside the file reads zero");
    check(pulses[0] == 1 && pulses[1] == 2 && pulses[3] == 0, "write pulses, none for read-only");
    finish();
  end
endmodule
