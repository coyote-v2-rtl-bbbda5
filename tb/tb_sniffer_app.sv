// tb_sniffer_app: programs the capture through AXI4-Lite, feeds random
// frames on the RX and TX sniff inputs, and rebuilds the records from the
// card-memory write stream. Checks: every frame appears once, in order per
// direction, with the right header (length, direction, rising time stamps)
// and data; write requests cover the buffer contiguously in 4 KB pieces and
// stopping flushes the partial tail; the status registers count bytes and
// frames; with a small buffer, frames that do not fit are dropped, counted
// and the buffer is marked full; the filter configuration reaches the filter
// only while the capture is on.
module tb_sniffer_app;
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  axil_req_t axi_req; axil_rsp_t axi_rsp;
  filt_cfg_t filt_cfg;
  logic [31:0] filt_drops;
  logic rx_snf_valid, rx_snf_ready, tx_snf_valid, tx_snf_ready;
  nbeat_t rx_snf, tx_snf;
  logic sq_wr_valid, sq_wr_ready, c_tx_valid, c_tx_ready;
  sq_t sq_wr; beat_t c_tx;
  sniffer_app dut (.*);

  task automatic wr(input int idx, input logic [63:0] d);
    @(negedge clk);
    axi_req.awvalid = 1; axi_req.wvalid = 1; axi_req.awaddr = 16'(8*idx); axi_req.wdata = d; axi_req.wstrb = '1;
    @(negedge clk); axi_req.awvalid = 0; axi_req.wvalid = 0;
  endtask
  task automatic rd(input int idx, output logic [63:0] d);
    @(negedge clk); axi_req.arvalid = 1; axi_req.araddr = 16'(8*idx);
    @(negedge clk); axi_req.arvalid = 0; d = axi_rsp.rdata;
  endtask

  function automatic logic [511:0] fdata(input int dir, input int id, input int b);
    logic [511:0] v;
    for (int k = 0; k < 16; k++) v[32*k +: 32] = 32'(dir * 1000003 + id * 131 + b * 17 + k) * 32'h2545F491;
    return v;
  endfunction

  // capture stream and request scoreboard
  logic [511:0] cap[$];
  longint rq_next;           // next expected request address
  longint rq_bytes;
  int n_short;
  always @(posedge clk) if (rst_n) begin
    if (c_tx_valid && c_tx_ready) cap.push_back(c_tx.data);
    if (sq_wr_valid && sq_wr_ready) begin
      checks++;
      if (longint'(sq_wr.vaddr) != rq_next || sq_wr.strm != STRM_CARD) begin
        failures++; $display("FAIL: request at %h, expected %h", sq_wr.vaddr, rq_next);
      end
      if (sq_wr.len != 4096) n_short++;
      rq_next += longint'(sq_wr.len); rq_bytes += longint'(sq_wr.len);
    end
  end

  int sent_beats [2][$];       // per direction, frame lengths in beats, in order
  int sent_len [2][$];
  int next_id [2];
  task automatic send_frames(input int n);
    int done_d [2], b [2], nb [2], len [2];
    done_d[0] = 0; done_d[1] = 0; b[0] = 0; b[1] = 0;
    for (int d = 0; d < 2; d++) begin nb[d] = 1 + $urandom % 6; len[d] = 64 * (nb[d] - 1) + 1 + $urandom % 64; end
    while (done_d[0] < n || done_d[1] < n) begin
      @(negedge clk);
      c_tx_ready  = $urandom % 4 != 0;
      sq_wr_ready = $urandom % 2 != 0;
      // retire beats taken at the last edge
      if (rx_snf_valid && rx_q) begin b[0]++; if (b[0] == nb[0]) begin sent_beats[0].push_back(nb[0]); sent_len[0].push_back(len[0]); done_d[0]++; next_id[0]++; b[0] = 0; nb[0] = 1 + $urandom % 6; len[0] = 64 * (nb[0] - 1) + 1 + $urandom % 64; end end
      if (tx_snf_valid && tx_q) begin b[1]++; if (b[1] == nb[1]) begin sent_beats[1].push_back(nb[1]); sent_len[1].push_back(len[1]); done_d[1]++; next_id[1]++; b[1] = 0; nb[1] = 1 + $urandom % 6; len[1] = 64 * (nb[1] - 1) + 1 + $urandom % 64; end end
      rx_snf_valid = done_d[0] < n && $urandom % 3 != 0;
      tx_snf_valid = done_d[1] < n && $urandom % 3 != 0;
      rx_snf.data = fdata(0, next_id[0], b[0]); rx_snf.last = (b[0] == nb[0] - 1);
      rx_snf.keep = rx_snf.last ? 64'((65'd1 << (len[0] - 64 * (nb[0] - 1))) - 1) : '1;
      tx_snf.data = fdata(1, next_id[1], b[1]); tx_snf.last = (b[1] == nb[1] - 1);
      tx_snf.keep = tx_snf.last ? 64'((65'd1 << (len[1] - 64 * (nb[1] - 1))) - 1) : '1;
    end
    @(negedge clk); rx_snf_valid = 0; tx_snf_valid = 0; c_tx_ready = 1; sq_wr_ready = 1;
    repeat (200) @(negedge clk);
  endtask
  logic rx_q, tx_q;
  always @(posedge clk) begin rx_q <= rx_snf_ready; tx_q <= tx_snf_ready; end

  // parse the captured records
  task automatic parse(output int nframes, output int bad);
    int i = 0;
    int got [2];
    longint last_ts = -1;
    got[0] = 0; got[1] = 0;
    bad = 0; nframes = 0;
    while (i < cap.size()) begin
      automatic int dir = int'(cap[i][80]);
      automatic int len = int'(cap[i][79:64]);
      automatic longint ts = longint'(cap[i][63:0]);
      automatic int nb = (len + 63) / 64;
      if (got[dir] >= sent_beats[dir].size() || nb != sent_beats[dir][got[dir]] || len != sent_len[dir][got[dir]]) begin
        bad++; $display("record %0d: dir %0d len %0d unexpected (idx %0d: %0d beats len %0d)", nframes, dir, len, got[dir], sent_beats[dir][got[dir]], sent_len[dir][got[dir]]); break;
      end
      if (ts <= last_ts && dir == 0) bad++;
      for (int b = 0; b < nb; b++)
        if (cap[i + 1 + b] != fdata(dir, got[dir], b)) bad++;
      got[dir]++; nframes++; i += 1 + nb;
    end
  endtask

  logic [63:0] d;
  int nf, bad;
  initial begin
    axi_req = '0; axi_req.bready = 1; axi_req.rready = 1; filt_drops = 32'd3;
    rx_snf_valid = 0; tx_snf_valid = 0; rx_snf = '0; tx_snf = '0; c_tx_ready = 1; sq_wr_ready = 1;
    rq_next = 64'h20_0000; rq_bytes = 0; n_short = 0; next_id[0] = 0; next_id[1] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    wr(1, 64'h12B7_1101_3);                    // rx_en, tx_en, proto 17, port 4791 (as packed)
    check(filt_cfg == '0, "filter off while capture is off");
    wr(2, 64'h20_0000);                        // buffer at 2 MB
    wr(3, 64'd1 << 20);                        // 1 MB
    wr(0, 64'd1);
    check(filt_cfg == filt_cfg_t'(64'h12B7_1101_3), "filter configuration passed on");
    send_frames(60);
    wr(0, 64'd0);                              // stop: flush
    repeat (20) @(negedge clk);
    parse(nf, bad);
    check(nf == 120 && bad == 0, $sformatf("%0d records parsed, %0d bad", nf, bad));
    check(rq_bytes == 64 * cap.size() && n_short <= 1, $sformatf("requests cover %0d bytes of %0d", rq_bytes, 64 * cap.size()));
    rd(4, d); check(d == 64'(64 * cap.size()), "bytes-written status");
    rd(5, d); check(d == 120, "frames status");
    rd(6, d); check(d == 3, "drops status includes filter drops");
    rd(7, d); check(d == 0, "not full");
    // small buffer: 2 KB
    cap.delete(); rq_next = 64'h40_0000; rq_bytes = 0; n_short = 0;
    for (int dd = 0; dd < 2; dd++) begin sent_beats[dd].delete(); sent_len[dd].delete(); end
    next_id[0] = 0; next_id[1] = 0;
    wr(2, 64'h40_0000); wr(3, 64'd2048); wr(0, 64'd1);
    send_frames(20);
    wr(0, 64'd0);
    repeat (20) @(negedge clk);
    rd(7, d); check(d == 1, "buffer full");
    rd(5, d);
    check(64 * cap.size() <= 2048 && rq_bytes == 64 * cap.size(), $sformatf("capture within buffer (%0d bytes)", 64 * cap.size()));
    rd(6, d); check(d > 3, $sformatf("drops counted when full (%0d)", d));
    finish();
  end
endmodule
