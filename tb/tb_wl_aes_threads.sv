// tb_wl_aes_threads: throughput scaling of the multi-threaded AES CBC
// application with the number of software threads, on a 32 KB message per
// thread (512 beats of 512 bits). For n = 1 to 8 active threads it
// streams random plaintext on n host streams at once, checks every output
// block against a CBC reference computed here from the AES round functions,
// and measures the cycles from the first input beat to the last output beat.
// One CBC thread can have only one block in the 10-stage pipeline, so a
// 512-bit beat (4 blocks) takes 40 cycles and a 32 KB message about 20480
// cycles; n threads share the pipeline and should finish n messages in the
// same time, i.e. throughput grows linearly with n. The printed rate assumes
// a 250 MHz clock. Linear scaling with cThreads is the published result; the
// clock and the check margin (1 %) are this test's.
module tb_wl_aes_threads;
  import coyote_pkg::*;
  import aes_pkg::*;
  localparam int T     = 8;
  localparam int BEATS = 32768 / BEAT_B;  // 512 beats per message
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic key_load, ecb;
  logic [127:0] key, iv;
  logic  [T-1:0] s_valid, s_ready, m_valid, m_ready;
  beat_t [T-1:0] s_beat, m_beat;
  logic [15:0] busy_stages;

  aes_cbc_mt #(.N_THR(T)) dut (.*);

  localparam logic [127:0] KEY = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam logic [127:0] IV  = 128'h000102030405060708090a0b0c0d0e0f;

  function automatic logic [127:0] ref_enc(input logic [127:0] k, input logic [127:0] p);
    logic [127:0] s, rk;
    logic [7:0] rc;
    rk = k; rc = 8'h01;
    s = p ^ rk;
    for (int r = 1; r <= 10; r++) begin
      rk = next_key(rk, rc); rc = xtime(rc);
      s = aes_round(s, rk, r == 10);
    end
    return s;
  endfunction

  logic [511:0] pt [T][BEATS];
  logic [127:0] chain [T];
  int  active;
  int  tx_i [T];
  int  rx_n [T];
  int  bad;
  longint t_last;

  always_comb
    for (int t = 0; t < T; t++) begin
      s_valid[t]      = (t < active) && (tx_i[t] < BEATS);
      s_beat[t].data  = pt[t][tx_i[t] % BEATS];
      s_beat[t].last  = (tx_i[t] == BEATS - 1);
      s_beat[t].tid   = TID_W'(t);
    end
  assign m_ready = '1;

  // Output checker: CBC reference per thread, chained from the IV.
  always @(posedge clk) begin
    if (rst_n) for (int t = 0; t < T; t++) begin
      if (s_valid[t] && s_ready[t]) tx_i[t] <= tx_i[t] + 1;
      if (m_valid[t]) begin
        automatic logic [127:0] c = chain[t];
        automatic logic [127:0] w;
        automatic int i = rx_n[t];
        for (int b = 0; b < 4; b++) begin
          w = ref_enc(KEY, pt[t][i][128*b +: 128] ^ c);
          if (m_beat[t].data[128*b +: 128] != w) bad <= bad + 1;
          c = w;
        end
        if (m_beat[t].last != (i == BEATS - 1)) bad <= bad + 1;
        chain[t] <= (i == BEATS - 1) ? IV : c;
        rx_n[t]  <= i + 1;
        t_last   <= cyc;
      end
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint t0, dt, dt1;
  initial begin
    active = 0; bad = 0; t_last = 0;
    for (int t = 0; t < T; t++) begin tx_i[t] = 0; rx_n[t] = 0; chain[t] = IV; end
    for (int t = 0; t < T; t++)
      for (int i = 0; i < BEATS; i++)
        for (int w = 0; w < 16; w++) pt[t][i][32*w +: 32] = $urandom;
    key_load = 0; key = KEY; iv = IV; ecb = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); key_load = 1; @(negedge clk); key_load = 0;
    repeat (20) @(negedge clk);

    for (int n = 1; n <= T; n++) begin
      for (int t = 0; t < T; t++) begin tx_i[t] = 0; rx_n[t] = 0; end
      t0 = cyc;
      active = n;
      for (int t = 0; t < n; t++) while (rx_n[t] < BEATS) @(posedge clk);
      @(negedge clk);
      active = 0;
      dt = t_last - t0;
      if (n == 1) dt1 = dt;
      check(bad == 0, $sformatf("%0d threads: %0d wrong beats", n, bad));
      // linear scaling: n messages in the time of one, within 1 %
      check(dt * 100 <= dt1 * 101, $sformatf("%0d threads took %0d cycles, one thread %0d", n, dt, dt1));
      $display("%0d cThread(s): %0d x 32 KB in %0d cycles = %0d MB/s at 250 MHz",
               n, n, dt, longint'(n) * 32768 * 250 / dt);
      repeat (20) @(negedge clk);
    end
    check(dt1 >= 40 * BEATS && dt1 <= 40 * BEATS + 40, $sformatf("one thread: %0d cycles, expected %0d", dt1, 40 * BEATS));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
