// tb_aes_pipeline: checks the ten-stage AES-128 core against the FIPS-197
// example vectors (Appendix B and C.1), checks the ten-cycle latency, and
// streams one block per cycle with distinct thread ids to check that the
// pipeline accepts a new block every cycle and keeps ids with their data.
// The ten stages follow the paper's AES figure; expected values are the
// public FIPS-197 vectors, not this design's output. Watchdog included.
module tb_aes_pipeline;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         key_load, in_valid, out_valid;
  logic [127:0] key, in_data, out_data;
  logic [3:0]   in_tid, out_tid;

  aes_pipeline dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Vectors: key, plaintext, ciphertext.
  localparam logic [127:0] K1 = 128'h000102030405060708090a0b0c0d0e0f;
  localparam logic [127:0] P1 = 128'h00112233445566778899aabbccddeeff;
  localparam logic [127:0] C1 = 128'h69c4e0d86a7b0430d8cdb78070b4c55a;
  localparam logic [127:0] K2 = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam logic [127:0] P2 = 128'h3243f6a8885a308d313198a2e0370734;
  localparam logic [127:0] C2 = 128'h3925841d02dc09fbdc118597196a0b32;

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lat;
  initial begin
    key_load = 0; in_valid = 0; key = '0; in_data = '0; in_tid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); key = K1; key_load = 1;
    @(negedge clk); key_load = 0;
    in_valid = 1; in_data = P1; in_tid = 4'd5;
    @(negedge clk); in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    check(out_data == C1, "FIPS-197 C.1 ciphertext");
    check(out_tid == 4'd5, "thread id carried");
    check(lat == 10, $sformatf("latency %0d, expected 10", lat));

    key = K2; key_load = 1;
    @(negedge clk); key_load = 0;
    // Back-to-back blocks: P2 with ids 0..7, one per cycle.
    for (int i = 0; i < 8; i++) begin
      in_valid = 1; in_data = P2; in_tid = 4'(i);
      @(negedge clk);
    end
    in_valid = 0;
    for (int i = 0; i < 8; i++) begin
      while (!out_valid) @(negedge clk);
      check(out_data == C2, "FIPS-197 Appendix B ciphertext");
      check(out_tid == 4'(i), "ids in order, one result per cycle");
      @(negedge clk);
    end
    check(!out_valid, "no extra output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
