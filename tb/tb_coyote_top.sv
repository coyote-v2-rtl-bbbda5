// tb_coyote_top: end-to-end test of the shell with its three vFPGAs, at the
// default parameters. Behavioural models stand in for the parts outside the
// shell: host memory behind the DMA engine (in-order read data, write
// acknowledgements after a delay), card memory (one array per channel), the
// network stack and the MAC, and the driver, which programs the shell over
// AXI4-Lite and serves interrupts.
//
// Scenario:
//  1. The driver maps 2 MB pages for the three vFPGAs and enables the
//     completion write-back.
//  2. vFPGA 0 (AES CBC) encrypts four messages, one per cThread/host stream
//     (16 KB on thread 0, 8 KB on threads 1-3), read from and written back to
//     host memory by host-issued requests; results are compared with a
//     reference AES. The slow CBC consumer makes the read streams run out of
//     credits. Thread 0's request is issued last: the vFPGA's request path
//     is in order, so a request waiting for credits holds those behind it.
//  3. At the same time vFPGA 1 adds two 16 KB vectors, read in alternating
//     8 KB requests for the same reason, into a third buffer
//     whose page is not mapped: the page fault interrupt makes the driver
//     map it and the write completes; the end of the vector raises a user
//     interrupt.
//  4. A 8 KB partial bitstream goes through the ICAP controller; its done
//     interrupt is checked, and a TLB invalidation raises its interrupt.
//  5. vFPGA 2 captures UDP port 4791 traffic in both directions into card
//     memory while the card write path is briefly held, forcing filter drops;
//     all traffic must pass through unchanged; the records are counted.
// Every mechanism is counted and a mechanism that never happened is a
// failure. Runs at the shell's default parameters (no overrides) and ends
// well inside the watchdog's 400000 cycles. The scenario is this
// design's; the mechanisms exercised are the ones the shell is built from.
module tb_coyote_top;
  import coyote_pkg::*;
  import aes_pkg::*;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired: pf %0d user %0d wb %0d stall %0d inter %0d h_rd %0d h_wr %0d hsq_pend %b cyc %0d",
             n_pf_irq, n_user_irq, n_wb, n_stall_cyc, n_interleave, h_rd.size(), h_wr.size(), dut.hsq_pend, cyc);
    foreach (hmem32[a]) $display("  wb %h = %0d", a, hmem32[a]);
    finish();
  end

  // ---------------- design ----------------
  axil_req_t shell_axi_req; axil_rsp_t shell_axi_rsp;
  axil_req_t [2:0] user_axi_req; axil_rsp_t [2:0] user_axi_rsp;
  logic dma_valid, dma_ready, h2c_valid, h2c_ready, c2h_valid, c2h_ready, c2h_last, wr_done;
  dreq_t dma_req;
  logic [DATA_W-1:0] h2c_data, c2h_data;
  logic wb_valid, wb_ready;
  logic [PADDR_W-1:0] wb_addr;
  logic [31:0] wb_data;
  logic irq_valid, irq_ready;
  logic [7:0] irq_vector;
  logic [63:0] irq_value;
  logic rcfg_valid, rcfg_ready, icap_csib, icap_rdwrb;
  logic [DATA_W-1:0] rcfg_data;
  logic [31:0] icap_i;
  logic [2:0] card_req_valid, card_req_ready, card_rd_valid, card_rd_ready, card_wr_valid, card_wr_ready, card_wr_done;
  dreq_t [2:0] card_req;
  logic [2:0][4:0] card_chan;
  logic [2:0][DATA_W-1:0] card_rd_data, card_wr_data;
  logic [2:0] net_req_valid, net_req_ready, net_cpl_valid, net_cpl_last;
  dreq_t [2:0] net_req;
  cq_t [2:0] net_cpl;
  logic stk_tx_valid, stk_tx_ready, stk_rx_valid, mac_tx_valid, mac_tx_ready, mac_rx_valid;
  nbeat_t stk_tx, stk_rx, mac_tx, mac_rx;
  logic [2:0] stall;
  logic [15:0] aes_busy_stages;
  coyote_top dut (.*);

  // ---------------- mechanism counters ----------------
  int n_pf_irq, n_user_irq, n_rcfg_irq, n_inval_irq, n_stall_cyc, n_interleave, n_wb, n_icap_words;
  int n_aes_overlap, n_card_pieces, n_snf_drop_seen, n_tlb_fill;
  int last_vfid = -1;
  logic [31:0] chan_seen;
  int irq_q[$];
  longint irq_val_q[$];

  // ---------------- host memory model ----------------
  logic [511:0] hmem [longint];
  function automatic logic [511:0] hpat(input longint beat);
    logic [511:0] v;
    for (int k = 0; k < 16; k++) v[32*k +: 32] = 32'(beat * 16 + k) * 32'h0101_0101 ^ 32'h1357_9bdf;
    return v;
  endfunction
  function automatic logic [511:0] hread(input longint beat);
    return hmem.exists(beat) ? hmem[beat] : hpat(beat);
  endfunction
  logic [31:0] hmem32 [longint];
  dreq_t h_rd[$], h_wr[$];
  int hrb = 0, hwb = 0, cyc = 0, hw_acks[$];
  logic rnd;
  // Model outputs change only after the falling edge (no race with the
  // model's bookkeeping at the rising edge).
  always @(negedge clk) begin
    rnd = $urandom % 5 != 0;
    #2;
    dma_ready = rnd;
    h2c_valid = h_rd.size() != 0 && rnd;
    h2c_data  = h_rd.size() != 0 ? hread(longint'(h_rd[0].addr >> 6) + hrb) : '0;
    c2h_ready = rnd;
    wr_done   = hw_acks.size() != 0 && hw_acks[0] <= cyc;
  end
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dma_valid && dma_ready) begin
      if (last_vfid >= 0 && last_vfid != int'(dma_req.vfid)) n_interleave++;
      last_vfid = int'(dma_req.vfid);
      if (dma_req.wr) h_wr.push_back(dma_req); else h_rd.push_back(dma_req);
    end
    if (h2c_valid && h2c_ready) begin
      hrb++;
      if (hrb == beats_of(h_rd[0].len)) begin void'(h_rd.pop_front()); hrb = 0; end
    end
    if (c2h_valid && c2h_ready) begin
      hmem[longint'(h_wr[0].addr >> 6) + hwb] = c2h_data;
      hwb++;
      if (c2h_last != (hwb == beats_of(h_wr[0].len))) begin failures++; $display("FAIL: c2h_last"); end
      if (hwb == beats_of(h_wr[0].len)) begin void'(h_wr.pop_front()); hwb = 0; hw_acks.push_back(cyc + 4 + $urandom % 16); end
    end
    if (wr_done) void'(hw_acks.pop_front());
    if (wb_valid && wb_ready) begin hmem32[longint'(wb_addr)] = wb_data; n_wb++; end
    if (irq_valid && irq_ready) begin irq_q.push_back(int'(irq_vector)); irq_val_q.push_back(longint'(irq_value)); end
    if (|stall) n_stall_cyc++;
    if (!icap_csib && !icap_rdwrb) n_icap_words++;
    if ($countones(aes_busy_stages) >= 2) n_aes_overlap++;
  end
  assign wb_ready = 1'b1;
  assign irq_ready = 1'b1;

  // ---------------- card memory model (per vFPGA port) ----------------
  logic [511:0] cmem [longint];
  typedef struct { dreq_t r; int ch; } creq_e;
  creq_e c_wr[$];
  int cwb = 0, cw_acks = 0;
  logic card_hold;
  always @(negedge clk) begin
    #2;
    card_req_ready = '1;
    card_wr_ready  = {!card_hold, 2'b11};
    card_wr_done   = {cw_acks > 0, 2'b00};
  end
  assign card_rd_valid = '0;
  assign card_rd_data  = '0;
  always @(posedge clk) if (rst_n) begin
    if (card_req_valid[2] && card_req_ready[2]) begin
      automatic creq_e e;
      e.r = card_req[2]; e.ch = int'(card_chan[2]);
      chan_seen[card_chan[2]] = 1'b1;
      if (card_req[2].wr) c_wr.push_back(e);
      else begin failures++; $display("FAIL: unexpected card read"); end
    end
    if (card_wr_done[2]) cw_acks--;
    if (card_wr_valid[2] && card_wr_ready[2]) begin
      cmem[(longint'(c_wr[0].ch) << 40) + longint'(c_wr[0].r.addr >> 6) + cwb] = card_wr_data[2];
      cwb++;
      if (cwb == beats_of(c_wr[0].r.len)) begin void'(c_wr.pop_front()); cwb = 0; cw_acks++; n_card_pieces++; end
    end
  end
  // no vFPGA here issues network requests; the stack model completes any
  assign net_req_ready = '1;
  assign net_cpl_valid = '0;
  assign net_cpl = '0;
  assign net_cpl_last = '0;

  // ---------------- AXI4-Lite driver ----------------
  task automatic axw(input int port, input int idx, input logic [63:0] d);
    axil_req_t r;
    r = '0; r.awvalid = 1; r.wvalid = 1; r.awaddr = 16'(8*idx); r.wdata = d; r.wstrb = '1; r.bready = 1; r.rready = 1;
    @(negedge clk);
    if (port < 0) shell_axi_req = r; else user_axi_req[port] = r;
    @(negedge clk);
    r.awvalid = 0; r.wvalid = 0;
    if (port < 0) shell_axi_req = r; else user_axi_req[port] = r;
  endtask
  task automatic axr(input int port, input int idx, output logic [63:0] d);
    axil_req_t r;
    r = '0; r.arvalid = 1; r.araddr = 16'(8*idx); r.bready = 1; r.rready = 1;
    @(negedge clk);
    if (port < 0) shell_axi_req = r; else user_axi_req[port] = r;
    @(negedge clk);
    r.arvalid = 0;
    if (port < 0) shell_axi_req = r; else user_axi_req[port] = r;
    d = (port < 0) ? shell_axi_rsp.rdata : user_axi_rsp[port].rdata;
  endtask
  task automatic map(input int vf, input longint va, input longint pa);
    axw(-1, 0, 64'(va)); axw(-1, 1, 64'(pa)); axw(-1, 2, 64'(vf));
    n_tlb_fill++;
  endtask
  // host-issued request on behalf of a vFPGA
  task automatic hreq(input int vf, input longint va, input int len, input strm_e s, input int dest, input logic wr);
    logic [63:0] st;
    do axr(-1, 8, st); while (st[1 + vf]);
    axw(-1, 6, 64'(va));
    axw(-1, 7, {12'd0, 4'(vf), 7'd0, wr, 4'd0, 4'(dest), 2'd0, 2'(s), 28'(len)});
  endtask

  // ---------------- AES reference ----------------
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

  // ---------------- network traffic ----------------
  function automatic nbeat_t fbeat(input int dir, input int id, input int b, input int nb, input logic match);
    nbeat_t x;
    for (int k = 0; k < 16; k++) x.data[32*k +: 32] = 32'(dir * 77777 + id * 313 + b * 7 + k) * 32'h2545F491;
    if (b == 0) begin
      x.data[8*12 +: 16] = 16'h0008;
      x.data[8*23 +: 8]  = 8'd17;
      x.data[8*36 +: 8]  = match ? 8'h12 : 8'h00;
      x.data[8*37 +: 8]  = match ? 8'hB7 : 8'h35;
    end
    x.keep = '1; x.last = (b == nb - 1);
    return x;
  endfunction
  nbeat_t exp_mac_tx[$], exp_stk_rx[$];
  int n_pass_err = 0, n_pass = 0;
  always @(posedge clk) if (rst_n) begin
    if (mac_tx_valid && mac_tx_ready) begin
      n_pass++;
      if (exp_mac_tx.size() == 0 || mac_tx != exp_mac_tx[0]) n_pass_err++;
      if (exp_mac_tx.size() != 0) void'(exp_mac_tx.pop_front());
    end
    if (stk_rx_valid) begin
      n_pass++;
      if (exp_stk_rx.size() == 0 || stk_rx != exp_stk_rx[0]) n_pass_err++;
      if (exp_stk_rx.size() != 0) void'(exp_stk_rx.pop_front());
    end
  end
  assign mac_tx_ready = 1'b1;
  int n_match;
  task automatic traffic(input int nframes);
    int tb_, rb, tid, rid, tnb, rnb;
    logic tm, rm;
    tb_ = 0; rb = 0; tid = 0; rid = 0; tnb = 3; rnb = 4; tm = 1; rm = 1;
    while (tid < nframes || rid < nframes) begin
      @(negedge clk);
      if (stk_tx_valid && txr_q) begin
        exp_mac_tx.push_back(stk_tx);
        if (stk_tx.last) begin if (tm) n_match++; tid++; tb_ = 0; tnb = 1 + $urandom % 5; tm = $urandom % 3 != 0; end
        else tb_++;
      end
      stk_tx_valid = tid < nframes;
      stk_tx = fbeat(1, tid, tb_, tnb, tm);
      mac_rx_valid = rid < nframes;
      mac_rx = fbeat(0, rid, rb, rnb, rm);
      if (mac_rx_valid) begin
        exp_stk_rx.push_back(mac_rx);
        if (mac_rx.last) begin if (rm) n_match++; rid++; rb = 0; rnb = 1 + $urandom % 5; rm = $urandom % 3 != 0; end
        else rb++;
      end
    end
    @(negedge clk); stk_tx_valid = 0; mac_rx_valid = 0;
  endtask
  logic txr_q;
  always @(posedge clk) txr_q <= stk_tx_ready;

  // ---------------- scenario ----------------
  localparam longint VA0 = 64'h0000_7f00_0000_0000, PA0 = 64'h0000_0001_0000_0000;   // vFPGA 0 buffers
  localparam longint VA1 = 64'h0000_7f10_0000_0000, PA1 = 64'h0000_0002_0000_0000;   // vFPGA 1 buffers
  localparam longint VA2 = 64'h0000_7f20_0000_0000, PA2 = 64'h0000_0000_0040_0000;   // vFPGA 2 card buffer
  localparam logic [127:0] KEY = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam logic [127:0] IV  = 128'h000102030405060708090a0b0c0d0e0f;
  localparam int MSG = 16384;
  function automatic int mlen(input int t);
    return t == 0 ? MSG : MSG / 2;
  endfunction
  logic [63:0] d;
  int bad;
  logic aes_done, vadd_done;

  task automatic serve_irqs();
    while (irq_q.size() != 0) begin
      automatic int v = irq_q.pop_front();
      automatic longint val = irq_val_q.pop_front();
      if (v < 3) begin
        n_pf_irq++;
        map(v, val & ~longint'(64'h1F_FFFF), (v == 1 ? PA1 + 64'h40_0000 : 0));
      end else if (v < 6) n_user_irq++;
      else if (v == 6) n_rcfg_irq++;
      else if (v == 7) n_inval_irq++;
    end
  endtask

  initial begin
    shell_axi_req = '0; user_axi_req = '0;
    rcfg_valid = 0; rcfg_data = '0; card_hold = 0;
    stk_tx_valid = 0; stk_tx = '0; mac_rx_valid = 0; mac_rx = '0;
    chan_seen = '0; n_match = 0;
    dma_ready = 0; h2c_valid = 0; h2c_data = '0; c2h_ready = 0; wr_done = 0;
    card_req_ready = '1; card_wr_ready = '1; card_wr_done = '0;
    {n_pf_irq, n_user_irq, n_rcfg_irq, n_inval_irq, n_stall_cyc, n_interleave, n_wb, n_icap_words} = '0;
    {n_aes_overlap, n_card_pieces, n_snf_drop_seen, n_tlb_fill} = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // 1. mappings and write-back
    map(0, VA0, PA0);
    map(1, VA1, PA1);                       // a and b; the result page VA1 + 2 MB is left unmapped
    map(2, VA2, PA2);
    axw(-1, 3, 64'h0000_0000_00F0_0000);    // write-back base
    axw(-1, 4, 64'd1);

    // 2./3. AES on vFPGA 0 and vadd on vFPGA 1, requests interleaved
    axw(0, 0, KEY[63:0]); axw(0, 1, KEY[127:64]);
    axw(0, 2, IV[63:0]);  axw(0, 3, IV[127:64]);
    axw(0, 4, 64'd0);                       // CBC
    // threads 1-3 get 8 KB messages, which fit their credits, and run
    // side by side; thread 0 gets 16 KB and waits for credits
    for (int t = 1; t < 4; t++) hreq(0, VA0 + t * MSG, mlen(t), STRM_HOST, t, 0);
    hreq(0, VA0, mlen(0), STRM_HOST, 0, 0);
    // the two operands in alternating 8 KB requests, so that neither waits
    // for credits behind the other
    for (int c = 0; c < MSG / 8192; c++) begin
      hreq(1, VA1 + c * 8192, 8192, STRM_HOST, 0, 0);
      hreq(1, VA1 + 64'h10_0000 + c * 8192, 8192, STRM_HOST, 1, 0);
    end
    hreq(1, VA1 + 64'h20_0000, MSG, STRM_HOST, 0, 1);     // unmapped: page fault
    for (int t = 1; t < 4; t++) hreq(0, VA0 + 64'h10_0000 + t * MSG, mlen(t), STRM_HOST, t, 1);
    hreq(0, VA0 + 64'h10_0000, mlen(0), STRM_HOST, 0, 1);
    // wait for all eight completions of vFPGA 0 and two of vFPGA 1, serving interrupts
    do begin
      @(negedge clk); serve_irqs();
      aes_done  = hmem32.exists(64'hF0_0004) && hmem32[64'hF0_0004] == 4;
      vadd_done = hmem32.exists(64'hF0_000C) && hmem32[64'hF0_000C] == 1;
    end while (!(aes_done && vadd_done));
    check(hmem32[64'hF0_0000] == 4, "write-back: 4 read completions of vFPGA 0");
    check(hmem32[64'hF0_0008] == 2 * MSG / 8192, "write-back: 4 read completions of vFPGA 1");
    // AES results
    bad = 0;
    for (int t = 0; t < 4; t++) begin
      automatic logic [127:0] c = IV;
      for (int b = 0; b < mlen(t) / 64; b++) begin
        automatic logic [511:0] p = hread(longint'((PA0 + t * MSG) >> 6) + b);
        automatic logic [511:0] o = hread(longint'((PA0 + 64'h10_0000 + t * MSG) >> 6) + b);
        for (int k = 0; k < 4; k++) begin
          c = ref_enc(KEY, p[128*k +: 128] ^ c);
          if (o[128*k +: 128] != c) bad++;
        end
      end
    end
    check(bad == 0, $sformatf("AES CBC ciphertext of 4 threads (%0d bad blocks)", bad));
    // vadd results at the page installed by the fault handler
    bad = 0;
    for (int b = 0; b < MSG / 64; b++) begin
      automatic logic [511:0] a = hread(longint'(PA1 >> 6) + b);
      automatic logic [511:0] bb = hread(longint'((PA1 + 64'h10_0000) >> 6) + b);
      automatic logic [511:0] y = hread(longint'((PA1 + 64'h40_0000) >> 6) + b);
      for (int k = 0; k < 16; k++) if (y[32*k +: 32] != a[32*k +: 32] + bb[32*k +: 32]) bad++;
    end
    check(bad == 0, $sformatf("vector sum written to the faulted page (%0d bad words)", bad));
    axr(1, 0, d); check(d == MSG / 64, "vadd beat counter");

    // 4. reconfiguration and TLB invalidation
    axw(-1, 5, 64'd8192);
    axr(-1, 8, d); check(d[0], "reconfiguration busy");
    begin
      automatic int t0 = cyc;
      for (int b = 0; b < 128; b++) begin
        @(negedge clk); rcfg_valid = 1; rcfg_data = hpat(b);
        #1 while (!rcfg_ready) begin @(negedge clk); #1; end
      end
      @(negedge clk); rcfg_valid = 0;
      while (n_rcfg_irq == 0) begin @(negedge clk); serve_irqs(); end
      check(n_icap_words == 2048, $sformatf("%0d ICAP words", n_icap_words));
      check(cyc - t0 < 2048 + 128 + 40, $sformatf("ICAP at one word per cycle (%0d cycles)", cyc - t0));
    end
    axw(-1, 0, 64'(VA0)); axw(-1, 2, 64'h100);     // invalidate vFPGA 0's page
    repeat (10) @(negedge clk); serve_irqs();

    // 5. traffic sniffer
    begin
      filt_cfg_t f;
      f = '0; f.rx_en = 1; f.tx_en = 1; f.proto_en = 1; f.proto = 8'd17; f.port_en = 1; f.port = 16'd4791;
      axw(2, 1, 64'(f));
      axw(2, 2, 64'(VA2)); axw(2, 3, 64'd1 << 20); axw(2, 0, 64'd1);
    end
    card_hold = 1;
    fork
      traffic(120);
      begin repeat (600) @(negedge clk); card_hold = 0; end
    join
    repeat (300) @(negedge clk);
    axw(2, 0, 64'd0);            // stop, flush the partial chunk
    repeat (300) @(negedge clk);
    begin
      logic [63:0] fr, dr, by;
      axr(2, 5, fr); axr(2, 6, dr); axr(2, 4, by);
      n_snf_drop_seen = int'(dr);
      // a frame cut short is stored with an empty closing beat and also
      // counted as dropped
      check(fr > 0 && fr <= 64'(n_match) && fr + dr >= 64'(n_match),
            $sformatf("captured %0d, dropped %0d, matching %0d", fr, dr, n_match));
      check(by > 0 && by % 64 == 0, "bytes written counts whole beats");
      check(n_pass_err == 0 && exp_mac_tx.size() == 0 && exp_stk_rx.size() == 0, "traffic passed unchanged");
      check(c_wr.size() == 0 && cw_acks == 0, "card writes finished");
    end

    // mechanisms
    $display("mechanisms: page_fault_irq=%0d tlb_fill=%0d credit_stall_cycles=%0d host_interleave=%0d writeback=%0d",
             n_pf_irq, n_tlb_fill, n_stall_cyc, n_interleave, n_wb);
    $display("mechanisms: user_irq=%0d reconfig_irq=%0d icap_words=%0d tlb_inval_irq=%0d aes_overlap_cycles=%0d",
             n_user_irq, n_rcfg_irq, n_icap_words, n_inval_irq, n_aes_overlap);
    $display("mechanisms: card_pieces=%0d stripe_channels=%0d sniff_drops=%0d traffic_beats=%0d",
             n_card_pieces, $countones(chan_seen), n_snf_drop_seen, n_pass);
    check(n_pf_irq > 0, "page fault happened");
    check(n_tlb_fill > 3, "TLB filled by the fault handler");
    check(n_stall_cyc > 0, "credit stall happened");
    check(n_interleave > 2, "host link interleaved vFPGAs");
    check(n_wb > 0, "write-back happened");
    check(n_user_irq > 0, "user interrupt happened");
    check(n_rcfg_irq == 1, "reconfiguration interrupt happened");
    check(n_inval_irq == 1, "TLB invalidation interrupt happened");
    check(n_aes_overlap > 0, "AES threads overlapped in the pipeline");
    check($countones(chan_seen) > 1, "card memory striped over channels");
    check(n_snf_drop_seen > 0, "sniffer drops happened");
    check(n_card_pieces > 0, "capture written to card memory");
    finish();
  end
endmodule
