// tb_rr_arbiter: checks that grants are one-hot, go only to requesters,
// rotate fairly among always-requesting inputs (equal counts) and are held
// while not acknowledged. The expected winner is computed from a separate
// model of the round-robin pointer.
// Round-robin sharing is the paper's; holding the grant until accepted is
// this design's choice. Watchdog included.
module tb_rr_arbiter;
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
  localparam int N = 5;
  logic [N-1:0] req, gnt;
  logic [2:0] gnt_idx;
  logic ack, gnt_valid;
  rr_arbiter #(.N(N)) dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end
  int last_m, cnt [N];
  initial begin
    req = '0; ack = 0; last_m = N-1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      req = (c < 300) ? '1 : N'($urandom);
      ack = (c % 7 != 3);
      #1;
      begin
        automatic int exp = -1;
        for (int k = 1; k <= N; k++) if (exp < 0 && req[(last_m + k) % N]) exp = (last_m + k) % N;
        check(gnt_valid == (req != 0), "valid iff any request");
        if (exp >= 0) begin
          check(int'(gnt_idx) == exp && gnt == N'(1) << exp, $sformatf("winner %0d expected %0d", gnt_idx, exp));
          if (ack) begin last_m = exp; if (c < 300) cnt[exp]++; end
        end
      end
    end
    for (int i = 1; i < N; i++) check(cnt[i] - cnt[0] <= 1 && cnt[0] - cnt[i] <= 1, "equal share under full load");
    finish();
  end
endmodule
