// tb_net_filter: sends random Ethernet frames (1-5 beats; some IPv4/UDP to
// port 4791, some to other ports, some non-IP) in both directions and checks:
//  - the stack<->MAC paths pass every beat unchanged and in order, TX under
//    random MAC back-pressure;
//  - with a ready sniff output, exactly the matching frames are copied whole;
//  - with a randomly stalling sniff output, every matching frame is either
//    copied whole or counted in `drops`, a cut copy ends with an empty last
//    beat, and nothing is copied that does not match;
//  - in header-only mode one beat per matching frame is copied, marked last.
module tb_net_filter;
  import coyote_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;
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
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  filt_cfg_t cfg;
  logic stk_tx_valid, stk_tx_ready, mac_tx_valid, mac_tx_ready, mac_rx_valid, stk_rx_valid;
  logic rx_snf_valid, rx_snf_ready, tx_snf_valid, tx_snf_ready;
  nbeat_t stk_tx, mac_tx, mac_rx, stk_rx, rx_snf, tx_snf;
  logic [31:0] drops;
  net_filter dut (.*);

  // frame generator: frame id in bytes 40..43, beat index in bytes 44..45
  function automatic nbeat_t mkbeat(input int id, input int b, input int nb, input int kind);
    nbeat_t x;
    for (int k = 0; k < 16; k++) x.data[32*k +: 32] = 32'(id * 31 + b * 7 + k) * 32'h9e3779b1;
    if (b == 0) begin
      x.data[8*12 +: 16] = kind == 2 ? 16'h0608 : 16'h0008;   // bytes 12,13 = 08 00 (IPv4) or 08 06
      x.data[8*23 +: 8]  = 8'd17;                              // UDP
      x.data[8*36 +: 8]  = kind == 0 ? 8'h12 : 8'h00;          // port 0x12B7 = 4791
      x.data[8*37 +: 8]  = kind == 0 ? 8'hB7 : 8'h50;
    end
    x.data[8*40 +: 32] = 32'(id);
    x.data[8*44 +: 16] = 16'(b);
    x.keep = '1; x.last = (b == nb - 1);
    return x;
  endfunction

  typedef struct { int id; int nb; int kind; } frame_t;
  function automatic frame_t newf(input int id);
    frame_t f;
    f.id = id;
    f.nb = 1 + int'($urandom % 5);
    f.kind = int'($urandom % 3);
    return f;
  endfunction
  nbeat_t tx_exp[$], rx_exp[$];          // pass-through scoreboards
  int tx_matches, rx_matches;
  int tx_id = 0, rx_id = 100000;

  // sniff scoreboards: collect frames then compare
  nbeat_t tx_cur[$], rx_cur[$];
  int tx_whole, rx_whole, tx_cut, rx_cut, bad_copies;
  int tx_copied_ids[$], rx_copied_ids[$];
  logic hdr_mode;

  task automatic judge(ref nbeat_t cur[$], ref int whole, ref int cut, ref int ids[$]);
    int id, nb, kind;
    id = int'(cur[0].data[8*40 +: 32]);
    kind = (cur[0].data[8*37 +: 8] == 8'hB7) ? 0 : 1;
    if (kind != 0) bad_copies++;
    if (cur[$].keep == '0) begin
      cut++;
      for (int b = 0; b < cur.size() - 1; b++) if (cur[b].data != mkbeat(id, b, 99, 0).data) bad_copies++;
    end else begin
      whole++; ids.push_back(id);
      for (int b = 0; b < cur.size(); b++)
        if (cur[b].data != mkbeat(id, b, 99, 0).data || (!hdr_mode && cur[b].last != (b == cur.size() - 1))) bad_copies++;
      if (hdr_mode && (cur.size() != 1 || !cur[0].last)) bad_copies++;
    end
    cur.delete();
  endtask

  always @(posedge clk) if (rst_n) begin
    if (mac_tx_valid && mac_tx_ready) begin
      checks++;
      if (tx_exp.size() == 0 || mac_tx != tx_exp[0]) begin failures++; $display("FAIL: TX pass-through"); end
      if (tx_exp.size() != 0) void'(tx_exp.pop_front());
    end
    if (stk_rx_valid) begin
      checks++;
      if (rx_exp.size() == 0 || stk_rx != rx_exp[0]) begin failures++; $display("FAIL: RX pass-through"); end
      if (rx_exp.size() != 0) void'(rx_exp.pop_front());
    end
    if (tx_snf_valid && tx_snf_ready) begin
      tx_cur.push_back(tx_snf);
      if (tx_snf.last) judge(tx_cur, tx_whole, tx_cut, tx_copied_ids);
    end
    if (rx_snf_valid && rx_snf_ready) begin
      rx_cur.push_back(rx_snf);
      if (rx_snf.last) judge(rx_cur, rx_whole, rx_cut, rx_copied_ids);
    end
  end

  // drivers
  int tx_b, rx_b;
  frame_t tf, rf;
  logic snf_random;
  task automatic run(input int nframes);
    int sent_tx = 0, sent_rx = 0;
    tx_b = 0; rx_b = 0;
    tf = newf(tx_id);
    rf = newf(rx_id);
    while (sent_tx < nframes || sent_rx < nframes) begin
      @(negedge clk);
      mac_tx_ready = $urandom % 4 != 0;
      tx_snf_ready = snf_random ? ($urandom % 3 == 0) : 1'b1;
      rx_snf_ready = snf_random ? ($urandom % 3 == 0) : 1'b1;
      // TX: advance if the previous beat was taken
      if (stk_tx_valid && stk_tx_ready_q) begin
        tx_exp.push_back(stk_tx);
        if (stk_tx.last) begin
          if (tf.kind == 0) tx_matches++;
          sent_tx++; tx_id++; tx_b = 0;
          tf = newf(tx_id);
        end else tx_b++;
      end
      stk_tx_valid = sent_tx < nframes && ($urandom % 5 != 0);
      stk_tx = mkbeat(tf.id, tx_b, tf.nb, tf.kind);
      // RX: the MAC cannot be stopped
      mac_rx_valid = sent_rx < nframes && ($urandom % 5 != 0);
      mac_rx = mkbeat(rf.id, rx_b, rf.nb, rf.kind);
      if (mac_rx_valid) begin
        rx_exp.push_back(mac_rx);
        if (mac_rx.last) begin
          if (rf.kind == 0) rx_matches++;
          sent_rx++; rx_id++; rx_b = 0;
          rf = newf(rx_id);
        end else rx_b++;
      end
    end
    @(negedge clk); stk_tx_valid = 0; mac_rx_valid = 0; mac_tx_ready = 1; tx_snf_ready = 1; rx_snf_ready = 1;
    repeat (20) @(negedge clk);
  endtask
  logic stk_tx_ready_q;
  always @(posedge clk) stk_tx_ready_q <= stk_tx_ready;   // sampled ready of the beat on the bus

  initial begin
    stk_tx_valid = 0; stk_tx = '0; mac_rx_valid = 0; mac_rx = '0; mac_tx_ready = 1;
    tx_snf_ready = 1; rx_snf_ready = 1; snf_random = 0; hdr_mode = 0;
    tx_matches = 0; rx_matches = 0; tx_whole = 0; rx_whole = 0; tx_cut = 0; rx_cut = 0; bad_copies = 0;
    cfg = '0; cfg.rx_en = 1; cfg.tx_en = 1; cfg.proto_en = 1; cfg.proto = 8'd17; cfg.port_en = 1; cfg.port = 16'd4791;
    repeat (3) @(posedge clk); rst_n = 1;
    // 1: sniff output always ready
    run(200);
    check(tx_exp.size() == 0 && rx_exp.size() == 0, "all beats passed through");
    check(drops == 0, "no drops with a ready sniff output");
    check(tx_whole == tx_matches && rx_whole == rx_matches && tx_cut == 0 && rx_cut == 0,
          $sformatf("all matching frames copied whole (tx %0d/%0d rx %0d/%0d)", tx_whole, tx_matches, rx_whole, rx_matches));
    check(bad_copies == 0, "copies are exact and only of matching frames");
    // 2: stalling sniff output
    tx_matches = 0; rx_matches = 0; tx_whole = 0; rx_whole = 0; tx_cut = 0; rx_cut = 0;
    snf_random = 1;
    run(400);
    check(tx_exp.size() == 0 && rx_exp.size() == 0, "pass-through unaffected by sniff stalls");
    check(drops > 0 && tx_cut + rx_cut > 0, $sformatf("drops happened (%0d, %0d cut)", drops, tx_cut + rx_cut));
    check(tx_whole + rx_whole + int'(drops) == tx_matches + rx_matches,
          $sformatf("whole copies %0d + drops %0d == matches %0d", tx_whole + rx_whole, drops, tx_matches + rx_matches));
    check(bad_copies == 0, "copies exact under stalls");
    // 3: header only
    snf_random = 0; hdr_mode = 1; cfg.hdr_only = 1;
    tx_matches = 0; rx_matches = 0; tx_whole = 0; rx_whole = 0; tx_cut = 0; rx_cut = 0;
    run(200);
    check(tx_whole == tx_matches && rx_whole == rx_matches, "one header beat per matching frame");
    check(bad_copies == 0, "header copies exact and marked last");
    finish();
  end
endmodule
