// tb_aes_cbc_mt: checks the multi-threaded AES application against the
// NIST SP 800-38A AES-128 vectors (CBC F.2.1 and ECB F.1.1), checks chaining
// across beats against a reference built from the AES round functions,
// checks that one thread in CBC mode gets one block per 10 cycles (40 cycles
// per 512-bit beat) and that four threads together get four times that.
// The 10-cycle pipeline and one stream per thread follow the paper's AES
// CBC design; the vectors are the public NIST ones. Watchdog: 200000 cycles.
module tb_aes_cbc_mt;
  import coyote_pkg::*;
  import aes_pkg::*;
  localparam int T = 4;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic key_load, ecb;
  logic [127:0] key, iv;
  logic  [T-1:0] s_valid, s_ready, m_valid, m_ready;
  beat_t [T-1:0] s_beat, m_beat;
  logic [15:0] busy_stages;

  aes_cbc_mt #(.N_THR(T)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam logic [127:0] KEY = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam logic [127:0] IV  = 128'h000102030405060708090a0b0c0d0e0f;
  localparam logic [511:0] PT  = {128'hf69f2445df4f9b17ad2b417be66c3710, 128'h30c81c46a35ce411e5fbc1191a0a52ef,
                                  128'hae2d8a571e03ac9c9eb76fac45af8e51, 128'h6bc1bee22e409f96e93d7e117393172a};
  localparam logic [511:0] CBC = {128'h3ff1caa1681fac09120eca307586e1a7, 128'h73bed6b8e3c1743b7116e69e22229516,
                                  128'h5086cb9b507219ee95db113a917678b2, 128'h7649abac8119b246cee98e9b12e9197d};
  localparam logic [511:0] ECB = {128'h7b0c785e27e8ad3f8223207104725dd4, 128'h43b1cd7f598ece23881b00e3ed030688,
                                  128'hf5d3d58503b9699de785895a96fdbaaf, 128'h3ad77bb40d7a3660a89ecaf32466ef97};

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

  // Stimulus: per thread, a list of beats to send.
  logic [511:0] tx_data [T][8];
  logic         tx_last [T][8];
  int           tx_n [T];
  int           tx_i [T];
  logic [511:0] rx_data [T][8];
  logic         rx_last [T][8];
  longint       rx_time [T][8];
  int           rx_n [T];

  always_comb
    for (int t = 0; t < T; t++) begin
      s_valid[t] = (tx_i[t] < tx_n[t]);
      s_beat[t].data = tx_data[t][tx_i[t] % 8];
      s_beat[t].last = tx_last[t][tx_i[t] % 8];
      s_beat[t].tid  = TID_W'(t);
    end
  assign m_ready = '1;

  always @(posedge clk) begin
    if (rst_n) for (int t = 0; t < T; t++) begin
      if (s_valid[t] && s_ready[t]) tx_i[t] <= tx_i[t] + 1;
      if (m_valid[t]) begin
        rx_data[t][rx_n[t] % 8] <= m_beat[t].data;
        rx_last[t][rx_n[t] % 8] <= m_beat[t].last;
        rx_time[t][rx_n[t] % 8] <= cyc;
        if (m_beat[t].tid != TID_W'(t)) begin
          $display("FAIL: tid %0d on thread %0d", m_beat[t].tid, t); failures++;
        end
        rx_n[t] <= rx_n[t] + 1;
      end
    end
  end

  task automatic clear();
    for (int t = 0; t < T; t++) begin tx_n[t] = 0; tx_i[t] = 0; rx_n[t] = 0; end
  endtask

  task automatic wait_rx(input int t, input int n);
    while (rx_n[t] < n) @(posedge clk);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint t0, t1;
  logic [127:0] c, want;
  initial begin
    clear();
    key_load = 0; key = KEY; iv = IV; ecb = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); key_load = 1; @(negedge clk); key_load = 0;

    // 1. One thread, CBC, NIST vector, three single-beat messages.
    for (int i = 0; i < 3; i++) begin tx_data[0][i] = PT; tx_last[0][i] = 1; end
    tx_n[0] = 3;
    wait_rx(0, 3);
    for (int i = 0; i < 3; i++) begin
      check(rx_data[0][i] == CBC, $sformatf("CBC NIST vector, message %0d", i));
      check(rx_last[0][i] == 1'b1, "last flag kept");
    end
    check(rx_time[0][2] - rx_time[0][1] == 40, $sformatf("single thread: %0d cycles per beat, expected 40",
          rx_time[0][2] - rx_time[0][1]));

    // 2. Chaining across beats: thread 1, two beats in one message.
    @(negedge clk); clear();
    tx_data[1][0] = PT; tx_last[1][0] = 0;
    tx_data[1][1] = {PT[127:0], PT[255:128], PT[383:256], PT[511:384]}; tx_last[1][1] = 1;
    tx_n[1] = 2;
    wait_rx(1, 2);
    check(rx_data[1][0] == CBC && rx_last[1][0] == 0, "first beat of a chained message");
    c = CBC[511:384];
    for (int b = 0; b < 4; b++) begin
      want = ref_enc(KEY, tx_data[1][1][128*b +: 128] ^ c);
      check(rx_data[1][1][128*b +: 128] == want, $sformatf("chained block %0d of beat 2", b));
      c = want;
    end

    // 3. Four threads at once, four beats each.
    @(negedge clk); clear();
    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < 4; i++) begin tx_data[t][i] = PT; tx_last[t][i] = 1; end
    end
    t0 = cyc;
    for (int t = 0; t < T; t++) tx_n[t] = 4;
    for (int t = 0; t < T; t++) wait_rx(t, 4);
    t1 = cyc;
    for (int t = 0; t < T; t++)
      for (int i = 0; i < 4; i++) check(rx_data[t][i] == CBC, "CBC vector, 4 threads");
    // 16 beats x 4 blocks at 4 blocks per 10 cycles = 160 cycles plus fill.
    check(t1 - t0 <= 175, $sformatf("4 threads took %0d cycles, expected about 160", t1 - t0));
    check(rx_time[0][3] - rx_time[0][2] == 40, "each thread still 40 cycles per beat");

    // 4. ECB mode.
    @(negedge clk); clear(); ecb = 1;
    tx_data[2][0] = PT; tx_last[2][0] = 1; tx_n[2] = 1;
    wait_rx(2, 1);
    check(rx_data[2][0] == ECB, "ECB NIST vector");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
