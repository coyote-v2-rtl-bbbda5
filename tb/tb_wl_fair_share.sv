// tb_wl_fair_share: bandwidth sharing of the host link between tenants, as
// in the multi-tenant AES ECB benchmark (1 to 4 vFPGAs streaming from host
// memory at once). Each active tenant always has a 4 KB read packet ready at
// host_arbiter. A host model accepts up to 8 outstanding packets and returns
// read data in order, one 512-bit beat on 3 of every 4 cycles. That models a
// link slower than the 16 GB/s data path: about 12 GB/s at 250 MHz, close to
// the published host bandwidth. For n = 1..4 active tenants the test counts
// the beats each tenant receives in a 4096-cycle window after warm-up. It
// checks that every tenant gets total/n within one packet (round-robin per
// 4 KB packet), and that the total stays within 2 % of the single-tenant
// total (sharing costs no bandwidth). The equal sharing and the constant sum
// are the published result; the host model's rate and depth are this test's.
module tb_wl_fair_share;
  import coyote_pkg::*;
  localparam int N = 4;
  localparam int WIN = 4096;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic  [N-1:0] req_valid, req_ready;
  dreq_t [N-1:0] req;
  logic              dma_valid, dma_ready;
  dreq_t             dma_req;
  logic              h2c_valid, h2c_ready;
  logic [DATA_W-1:0] h2c_data;
  logic              c2h_valid, c2h_ready, c2h_last;
  logic [DATA_W-1:0] c2h_data;
  logic              wr_done;
  logic [N-1:0]      rd_valid;
  logic [DEST_W-1:0] rd_dest;
  logic [DATA_W-1:0] rd_data;
  logic              rd_pkt_end, rd_req_last;
  logic [N-1:0]      wr_pull;
  logic [DEST_W-1:0] wr_dest;
  logic [N-1:0]      wr_valid;
  logic [N-1:0][DATA_W-1:0] wr_data;
  logic [N-1:0]      wr_cpl_valid;
  logic [DEST_W-1:0] wr_cpl_dest;
  logic              wr_cpl_req_last;

  host_arbiter #(.N_REG(N)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // tenants: a 4 KB read packet always ready while active
  logic [N-1:0] active;
  always_comb
    for (int i = 0; i < N; i++) begin
      req_valid[i]     = active[i];
      req[i]           = '0;
      req[i].addr      = PADDR_W'(64'h10_0000 * (i + 1));
      req[i].len       = LEN_W'(PKT_B);
      req[i].strm      = STRM_HOST;
      req[i].vfid      = VFID_W'(i);
      req[i].last      = 1'b1;
    end
  assign wr_valid = '0;
  assign wr_data  = '0;
  assign c2h_ready = 1'b1;
  assign wr_done  = 1'b0;

  // host model: outstanding packets (beats left), data in order
  int outst [$];
  int n_out;
  always @(posedge clk) begin
    if (rst_n) begin
      if (dma_valid && dma_ready) begin
        outst.push_back(PKT_BEATS);
        if (dma_req.wr) begin $display("FAIL: unexpected write"); failures++; end
      end
      if (h2c_valid && h2c_ready) begin
        outst[0] = outst[0] - 1;
        if (outst[0] == 0) void'(outst.pop_front());
      end
    end
  end
  always @(negedge clk) begin
    #2;
    n_out     = outst.size();
    dma_ready = (n_out < 8);
    h2c_valid = (n_out != 0) && (cyc % 4 != 3);
    h2c_data  = {16{$urandom}};
  end

  // per-tenant beat counters
  int cnt [N];
  logic counting;
  always @(posedge clk)
    if (rst_n && counting)
      for (int i = 0; i < N; i++) if (rd_valid[i]) cnt[i] <= cnt[i] + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tot, tot1;
  initial begin
    active = '0; counting = 0; dma_ready = 0; h2c_valid = 0; h2c_data = '0;
    for (int i = 0; i < N; i++) cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 1; n <= N; n++) begin
      @(negedge clk);
      active = N'((1 << n) - 1);
      repeat (300) @(negedge clk);
      for (int i = 0; i < N; i++) cnt[i] = 0;
      counting = 1;
      repeat (WIN) @(negedge clk);
      counting = 0;
      active = '0;
      tot = 0;
      for (int i = 0; i < N; i++) tot += cnt[i];
      if (n == 1) tot1 = tot;
      $display("%0d tenant(s): total %0d beats in %0d cycles (%0d MB/s at 250 MHz), per tenant %0d %0d %0d %0d",
               n, tot, WIN, longint'(tot) * 64 * 250 / WIN, cnt[0], cnt[1], cnt[2], cnt[3]);
      check(tot * 100 >= tot1 * 98, $sformatf("%0d tenants: total %0d beats, single tenant %0d", n, tot, tot1));
      for (int i = 0; i < N; i++) begin
        if (i < n)
          check(cnt[i] >= tot / n - PKT_BEATS - 1 && cnt[i] <= tot / n + PKT_BEATS + 1,
                $sformatf("%0d tenants: tenant %0d got %0d beats of %0d", n, i, cnt[i], tot));
        else
          check(cnt[i] == 0, $sformatf("inactive tenant %0d got data", i));
      end
      // drain the outstanding packets before the next run
      while (outst.size() != 0) @(negedge clk);
      repeat (10) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
