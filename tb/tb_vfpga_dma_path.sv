// tb_vfpga_dma_path: one vFPGA slice between behavioural host-link and card
// memory models. The host model returns read data (a pattern of the physical
// address, or what was written there) in request order and acknowledges
// writes; the card model keeps per-channel memory. Checks:
//  - a read of an unmapped page raises a page fault with the page's address,
//    stalls until the driver installs the translation, then completes;
//  - host reads arrive on the requested stream with the data of the
//    translated address and one completion entry per request;
//  - host writes reach the translated address and complete;
//  - card writes are striped over several channels and read back intact;
//  - a stream whose vFPGA does not drain its data runs out of credits and
//    raises `stall` while the other streams continue;
//  - requests issued by the host for the vFPGA and network requests pass
//    through with their completions.
module tb_vfpga_dma_path;
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
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired: pf %0d cq %0d %0d %0d %0d h_wr %0d stall %0d", pf_cnt, cq_cnt[0], cq_cnt[1], cq_cnt[2], cq_cnt[3], h_wr.size(), stall_cyc);
    finish();
  end

  localparam int NH = 4, NC = 6, NCH = 32;
  logic sq_rd_valid, sq_rd_ready, sq_wr_valid, sq_wr_ready, hsq_valid, hsq_ready, hsq_wr;
  sq_t sq_rd, sq_wr, hsq;
  logic tlb_wr_valid, tlb_wr_inval, tlb_inv_done, pf_valid;
  logic [VADDR_W-1:0] tlb_wr_vaddr, pf_vaddr;
  logic [PADDR_W-1:0] tlb_wr_paddr;
  logic [NH-1:0] h_rx_valid, h_rx_ready, h_tx_valid, h_tx_ready;
  beat_t [NH-1:0] h_rx, h_tx;
  logic [NC-1:0] c_rx_valid, c_rx_ready, c_tx_valid, c_tx_ready;
  beat_t [NC-1:0] c_rx, c_tx;
  logic hreq_valid, hreq_ready, hrd_valid, hrd_pkt_end, hrd_req_last, hwr_pull, hwr_valid;
  logic hwr_cpl_valid, hwr_cpl_req_last;
  dreq_t hreq, creq, nreq;
  logic [DEST_W-1:0] hrd_dest, hwr_dest, hwr_cpl_dest;
  logic [DATA_W-1:0] hrd_data, hwr_data, crd_data, cwr_data;
  logic creq_valid, creq_ready, crd_valid, crd_ready, cwr_valid, cwr_ready, cwr_done;
  logic [4:0] creq_chan;
  logic nreq_valid, nreq_ready, ncpl_valid, ncpl_req_last, stall;
  cq_t ncpl;
  logic [3:0] cq_valid;
  cq_t [3:0] cq;
  vfpga_dma_path #(.N_HSTRM(NH), .VFID(4'd0)) dut (.*);

  // ---------------- host memory model ----------------
  logic [511:0] hmem [longint];
  function automatic logic [511:0] hread(input longint pa_beat);
    if (hmem.exists(pa_beat)) return hmem[pa_beat];
    return {16{32'(pa_beat) ^ 32'hA5A5_0000}};
  endfunction
  dreq_t h_rd[$], h_wr[$];
  int hrb = 0, hwb = 0, cyc = 0, hw_acks[$];
  logic [DEST_W-1:0] hw_ack_dest[$];
  logic hw_ack_last[$];
  logic rnd_h;
  // Model outputs change only just after the falling edge, so that the
  // model's own updates at the rising edge cannot race with the design.
  always @(negedge clk) begin
    rnd_h = $urandom % 4 != 0;
    #2;
    hreq_ready = rnd_h;
    hrd_valid = h_rd.size() != 0 && rnd_h;
    hrd_dest = 0; hrd_data = '0; hrd_pkt_end = 0; hrd_req_last = 0;
    if (h_rd.size() != 0) begin
      hrd_dest = h_rd[0].dest;
      hrd_data = hread(longint'(h_rd[0].addr >> 6) + hrb);
      hrd_pkt_end = (hrb + 1 == beats_of(h_rd[0].len));
      hrd_req_last = h_rd[0].last;
    end
    hwr_pull = h_wr.size() != 0 && hwr_valid && rnd_h;
    hwr_dest = h_wr.size() != 0 ? h_wr[0].dest : '0;
    hwr_cpl_valid = hw_acks.size() != 0 && hw_acks[0] <= cyc;
    hwr_cpl_dest = hw_ack_dest.size() != 0 ? hw_ack_dest[0] : '0;
    hwr_cpl_req_last = hw_ack_last.size() != 0 ? hw_ack_last[0] : 1'b0;
  end
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (hreq_valid && hreq_ready) begin
      check(hreq.vfid == 0 && hreq.strm == STRM_HOST, "host request tagged");
      if (hreq.wr) h_wr.push_back(hreq); else h_rd.push_back(hreq);
    end
    if (hrd_valid) begin
      hrb++;
      if (hrd_pkt_end) begin void'(h_rd.pop_front()); hrb = 0; end
    end
    if (hwr_pull) begin
      hmem[longint'(h_wr[0].addr >> 6) + hwb] = hwr_data;
      hwb++;
      if (hwb == beats_of(h_wr[0].len)) begin
        hw_acks.push_back(cyc + 3 + $urandom % 10); hw_ack_dest.push_back(h_wr[0].dest); hw_ack_last.push_back(h_wr[0].last);
        void'(h_wr.pop_front()); hwb = 0;
      end
    end
    if (hwr_cpl_valid) begin void'(hw_acks.pop_front()); void'(hw_ack_dest.pop_front()); void'(hw_ack_last.pop_front()); end
  end

  // ---------------- card memory model ----------------
  logic [511:0] cmem [longint];
  typedef struct { dreq_t r; int ch; } creq_e;
  creq_e c_rd[$], c_wr[$];
  int crb = 0, cwb = 0, cw_acks = 0, chans_used = 0;
  logic [NCH-1:0] chan_seen;
  always @(negedge clk) begin
    #2;
    creq_ready = rnd_h;
    crd_valid = c_rd.size() != 0 && rnd_h;
    crd_data = '0;
    if (c_rd.size() != 0) begin
      automatic longint k = (longint'(c_rd[0].ch) << 40) + longint'(c_rd[0].r.addr >> 6) + crb;
      crd_data = cmem.exists(k) ? cmem[k] : '0;
    end
    cwr_ready = rnd_h;
    cwr_done = cw_acks > 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (creq_valid && creq_ready) begin
      automatic creq_e e;
      e.r = creq; e.ch = int'(creq_chan);
      chan_seen[creq_chan] = 1'b1;
      if (creq.wr) c_wr.push_back(e); else c_rd.push_back(e);
    end
    if (crd_valid && crd_ready) begin
      crb++;
      if (crb == beats_of(c_rd[0].r.len)) begin void'(c_rd.pop_front()); crb = 0; end
    end
    if (cwr_done) cw_acks--;
    if (cwr_valid && cwr_ready) begin
      cmem[(longint'(c_wr[0].ch) << 40) + longint'(c_wr[0].r.addr >> 6) + cwb] = cwr_data;
      cwb++;
      if (cwb == beats_of(c_wr[0].r.len)) begin void'(c_wr.pop_front()); cwb = 0; cw_acks++; end
    end
  end

  // ---------------- network model ----------------
  int n_net = 0;
  always_comb nreq_ready = 1'b1;
  always @(posedge clk) if (rst_n) begin
    ncpl_valid <= nreq_valid;
    ncpl <= '{strm: STRM_NET, dest: nreq.dest, wr: nreq.wr};
    ncpl_req_last <= nreq.last;
    if (nreq_valid) n_net++;
  end

  // ---------------- completions, faults, stalls ----------------
  int cq_cnt [4];
  int pf_cnt = 0, stall_cyc = 0;
  logic [VADDR_W-1:0] last_pf;
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 4; k++) if (cq_valid[k]) cq_cnt[k]++;
    if (pf_valid) begin pf_cnt++; last_pf = pf_vaddr; end
    if (stall) stall_cyc++;
  end

  // ---------------- vFPGA-side helpers ----------------
  task automatic map(input longint va, input longint pa);
    @(negedge clk); tlb_wr_valid = 1; tlb_wr_inval = 0; tlb_wr_vaddr = VADDR_W'(va); tlb_wr_paddr = PADDR_W'(pa);
    @(negedge clk); tlb_wr_valid = 0;
  endtask
  task automatic issue(input logic wr, input strm_e s, input int dest, input longint va, input int len);
    sq_t q;
    q.vaddr = VADDR_W'(va); q.len = LEN_W'(len); q.strm = s; q.dest = DEST_W'(dest);
    @(negedge clk);
    if (wr) begin sq_wr_valid = 1; sq_wr = q; end else begin sq_rd_valid = 1; sq_rd = q; end
    #1 while (!(wr ? sq_wr_ready : sq_rd_ready)) begin @(negedge clk); #1; end
    @(negedge clk); sq_wr_valid = 0; sq_rd_valid = 0;
  endtask
  // collect n beats of a host (card) read stream and compare with expected words
  task automatic collect_host(input int d, input longint pa, input int nb, output int bad);
    int got = 0;
    bad = 0;
    while (got < nb) begin
      @(posedge clk);
      if (h_rx_valid[d] && h_rx_ready[d]) begin
        if (h_rx[d].data != hread((pa >> 6) + got)) bad++;
        if (h_rx[d].last != (got == nb - 1)) bad++;
        got++;
      end
    end
  endtask
  task automatic collect_card(input int d, input int nb, input int seed, output int bad);
    int got = 0;
    bad = 0;
    while (got < nb) begin
      @(posedge clk);
      if (c_rx_valid[d] && c_rx_ready[d]) begin
        if (c_rx[d].data != {16{32'(seed + got)}}) bad++;
        got++;
      end
    end
  endtask
  task automatic send_host(input int d, input int nb, input int seed);
    for (int i = 0; i < nb; i++) begin
      @(negedge clk); h_tx_valid[d] = 1; h_tx[d] = '{data: {16{32'(seed + i)}}, tid: '0, last: i == nb - 1};
      #1 while (!h_tx_ready[d]) begin @(negedge clk); #1; end
    end
    @(negedge clk); h_tx_valid[d] = 0;
  endtask
  task automatic send_card(input int d, input int nb, input int seed);
    for (int i = 0; i < nb; i++) begin
      @(negedge clk); c_tx_valid[d] = 1; c_tx[d] = '{data: {16{32'(seed + i)}}, tid: '0, last: i == nb - 1};
      #1 while (!c_tx_ready[d]) begin @(negedge clk); #1; end
    end
    @(negedge clk); c_tx_valid[d] = 0;
  endtask

  localparam longint VA = 64'h7f00_0000_0000, PA = 64'h0000_1_4000_0000;
  int bad, bad2;
  initial begin
    sq_rd_valid = 0; sq_wr_valid = 0; hsq_valid = 0; hsq_wr = 0; sq_rd = '0; sq_wr = '0; hsq = '0;
    tlb_wr_valid = 0; tlb_wr_inval = 0; tlb_wr_vaddr = '0; tlb_wr_paddr = '0;
    h_rx_ready = '1; h_tx_valid = '0; h_tx = '0; c_rx_ready = '1; c_tx_valid = '0; c_tx = '0;
    chan_seen = '0; cq_cnt = '{0, 0, 0, 0};
    repeat (3) @(posedge clk); rst_n = 1;

    // 1. page fault on first touch
    fork
      issue(0, STRM_HOST, 1, VA + 64'h100, 8192);
      collect_host(1, PA + 64'h100, 128, bad);
      begin
        wait (pf_cnt > 0);
        check(last_pf >> 21 == VA >> 21, "page fault names the faulting page");
        repeat (50) @(negedge clk);
        check(cq_cnt[0] == 0, "request held during the fault");
        map(VA, PA);
      end
    join
    check(bad == 0, "read after fault returns translated data");
    repeat (20) @(posedge clk);
    check(cq_cnt[0] == 1, "one completion for the read");
    check(pf_cnt == 1, "one page fault");

    // 2. host write then read back on another stream, crossing into a second page
    map(VA + 64'h20_0000, PA + 64'h80_0000);
    fork
      issue(1, STRM_HOST, 2, VA + 64'h1F_F000, 12288);
      send_host(2, 192, 1000);
    join
    wait (cq_cnt[1] == 1);
    fork
      issue(0, STRM_HOST, 3, VA + 64'h1F_F000, 12288);
      begin
        for (int i = 0; i < 192; i++) begin
          @(posedge clk);
          while (!(h_rx_valid[3] && h_rx_ready[3])) @(posedge clk);
          if (h_rx[3].data != {16{32'(1000 + i)}}) bad++;
        end
      end
    join
    check(bad == 0, "host write read back across the page boundary");
    check(hmem.exists(longint'((PA + 64'h80_0000) >> 6)), "second page written at its own physical address");

    // 3. card memory: write 32 KB from card stream 4, read it back on stream 5
    fork
      issue(1, STRM_CARD, 4, VA + 64'h4000, 32768);
      send_card(4, 512, 5000);
    join
    wait (cq_cnt[3] >= 1);
    fork
      issue(0, STRM_CARD, 5, VA + 64'h4000, 32768);
      collect_card(5, 512, 5000, bad);
    join
    check(bad == 0, "card data read back intact");
    check($countones(chan_seen) >= 8, $sformatf("striped over %0d channels", $countones(chan_seen)));

    // 4. credit stall: stream 0 is not drained
    @(negedge clk); h_rx_ready[0] = 0;
    fork
      issue(0, STRM_HOST, 0, VA + 64'h10_0000, 32768);
      begin
        repeat (500) @(posedge clk);
        check(stall_cyc > 100, $sformatf("stall raised (%0d cycles)", stall_cyc));
        @(negedge clk); h_rx_ready[0] = 1;
      end
      collect_host(0, PA + 64'h10_0000, 512, bad2);
    join
    check(bad2 == 0, "stalled stream completes after draining");

    // 5. host-issued request and a network request
    @(negedge clk); hsq_valid = 1; hsq_wr = 0; hsq.vaddr = VADDR_W'(VA); hsq.len = 28'd4096; hsq.strm = STRM_HOST; hsq.dest = 4'd1;
    #1 while (!hsq_ready) begin @(negedge clk); #1; end
    @(negedge clk); hsq_valid = 0;
    collect_host(1, PA, 64, bad);
    check(bad == 0, "host-issued request served");
    issue(1, STRM_NET, 0, VA + 64'h8000, 9000);
    repeat (50) @(posedge clk);
    check(n_net == 3, $sformatf("network request split into 4 KB packets (%0d)", n_net));
    check(cq_cnt[0] == 4 && cq_cnt[1] == 1 && cq_cnt[2] == 1 && cq_cnt[3] == 2,
          $sformatf("completion counts %0d %0d %0d %0d", cq_cnt[0], cq_cnt[1], cq_cnt[2], cq_cnt[3]));
    finish();
  end
endmodule
