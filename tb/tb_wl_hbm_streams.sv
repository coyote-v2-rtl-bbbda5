// tb_wl_hbm_streams: card-memory throughput of one vFPGA against the number
// of parallel card streams (1 to 6), the shape of the HBM scaling benchmark.
// For n streams the vFPGA reads a 64 KB buffer per stream through its read
// send queue. Requests are issued in 8 KB pieces, alternating between the
// streams, because the request path is in order. Each request is translated
// by the TLB (one 2 MB page) and striped over 32 channels. The buffers are
// placed 37 stripes apart, so at any time the streams hit different channels.
//
// The HBM model returns data in request order, but each channel produces
// only one beat every R = 8 cycles; pieces on different channels are
// produced in parallel and buffered. One stream (2 credits, so 2 packets in
// flight) therefore gets about 2/8 of a beat per cycle. More streams add
// channels until the 512-bit data path (one beat per cycle) is full. Every
// beat is checked against the physical address it should come from. The test
// checks that throughput grows with n until that limit. Scaling with streams
// is the published behaviour; the channel rate R and the buffer placement
// are this test's choices.
module tb_wl_hbm_streams;
  import coyote_pkg::*;
  localparam int R = 8;
  localparam int NC = 6, NH = 4, NCH = 32;
  localparam int BUF_B = 65536;
  localparam int BEATS = BUF_B / BEAT_B;          // 1024 beats per stream
  localparam longint VA = 64'h4000_0000, PA = 64'h8000_0000;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

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

  // unused services
  assign hsq_valid = 1'b0; assign hsq = '0; assign hsq_wr = 1'b0;
  assign sq_wr_valid = 1'b0; assign sq_wr = '0;
  assign h_rx_ready = '1; assign h_tx_valid = '0; assign h_tx = '0;
  assign c_tx_valid = '0; assign c_tx = '0; assign c_rx_ready = '1;
  assign hreq_ready = 1'b1; assign hrd_valid = 1'b0; assign hrd_dest = '0; assign hrd_data = '0;
  assign hrd_pkt_end = 1'b0; assign hrd_req_last = 1'b0; assign hwr_pull = 1'b0; assign hwr_dest = '0;
  assign hwr_cpl_valid = 1'b0; assign hwr_cpl_dest = '0; assign hwr_cpl_req_last = 1'b0;
  assign cwr_ready = 1'b1; assign cwr_done = 1'b0;
  assign nreq_ready = 1'b1; assign ncpl_valid = 1'b0; assign ncpl = '0; assign ncpl_req_last = 1'b0;

  // ---------------- HBM model: in order, R cycles per beat per channel ----------------
  int  q_ch [$];     // channel of each queued piece
  int  q_pb [$];     // first physical beat index of the piece
  int  q_n  [$];     // beats in the piece
  int  q_made [$];   // beats the channel has produced so far
  int  q_sent;       // beats of the head piece delivered
  logic [NCH-1:0] ch_busy;
  always @(posedge clk) if (rst_n) begin
    if (creq_valid && creq_ready) begin
      if (creq.wr) begin $display("FAIL: unexpected card write"); failures++; end
      q_ch.push_back(int'(creq_chan));
      // physical stripe = in-channel stripe * 32 + channel
      q_pb.push_back(int'(((creq.addr >> 12) * NCH + creq_chan) * 64 + ((creq.addr & 12'hFFF) >> 6)));
      q_n.push_back(int'(beats_of(creq.len)));
      q_made.push_back(0);
    end
    if (crd_valid && crd_ready) begin
      q_sent = q_sent + 1;
      if (q_sent == q_n[0]) begin
        void'(q_ch.pop_front()); void'(q_pb.pop_front()); void'(q_n.pop_front()); void'(q_made.pop_front());
        q_sent = 0;
      end
    end
    // each channel works on its oldest unfinished piece, one beat per R cycles
    if (cyc % R == 0) begin
      ch_busy = '0;
      foreach (q_ch[i])
        if (!ch_busy[q_ch[i]] && q_made[i] < q_n[i]) begin
          q_made[i] = q_made[i] + 1;
          ch_busy[q_ch[i]] = 1'b1;
        end
    end
  end
  always @(negedge clk) begin
    #2;
    creq_ready = 1'b1;
    crd_valid  = q_ch.size() != 0 && q_sent < q_made[0];
    crd_data   = '0;
    if (q_ch.size() != 0) crd_data = {16{32'(q_pb[0] + q_sent)}};
  end

  // ---------------- per-stream receivers ----------------
  int got [NC];
  int bad;
  longint t_last;
  always @(posedge clk) if (rst_n)
    for (int s = 0; s < NC; s++)
      if (c_rx_valid[s] && c_rx_ready[s]) begin
        // expected physical beat: stream s's buffer starts 37*s stripes into the page
        if (c_rx[s].data[31:0] != 32'((PA >> 6) + s * 37 * 64 + got[s])) bad <= bad + 1;
        got[s] <= got[s] + 1;
        t_last <= cyc;
      end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(input int s, input longint off, input int len);
    @(negedge clk);
    sq_rd_valid = 1;
    sq_rd = '0;
    sq_rd.vaddr = VADDR_W'(VA + longint'(s) * 37 * 4096 + off);
    sq_rd.len   = LEN_W'(len);
    sq_rd.strm  = STRM_CARD;
    sq_rd.dest  = DEST_W'(s);
    #1 while (!sq_rd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    sq_rd_valid = 0;
  endtask

  longint t0, dt;
  real tp [NC+1];
  initial begin
    sq_rd_valid = 0; sq_rd = '0; bad = 0; t_last = 0; q_sent = 0;
    tlb_wr_valid = 0; tlb_wr_inval = 0; tlb_wr_vaddr = '0; tlb_wr_paddr = '0;
    crd_valid = 0; crd_data = '0; creq_ready = 0;
    for (int s = 0; s < NC; s++) got[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    tlb_wr_valid = 1; tlb_wr_vaddr = VADDR_W'(VA); tlb_wr_paddr = PADDR_W'(PA);
    @(negedge clk);
    tlb_wr_valid = 0;
    repeat (5) @(negedge clk);
    for (int n = 1; n <= NC; n++) begin
      for (int s = 0; s < NC; s++) got[s] = 0;
      t0 = cyc;
      for (int off = 0; off < BUF_B; off += 8192)
        for (int s = 0; s < n; s++) rd(s, off, 8192);
      for (int s = 0; s < n; s++) while (got[s] < BEATS) @(posedge clk);
      @(negedge clk);
      dt = t_last - t0;
      tp[n] = real'(n * BEATS) / real'(dt);
      $display("%0d stream(s): %0d KB in %0d cycles = %0.2f beats/cycle (%0d MB/s at 250 MHz)",
               n, n * 64, dt, tp[n], longint'(tp[n] * 64.0 * 250.0));
      check(bad == 0, $sformatf("%0d streams: %0d beats from the wrong address", n, bad));
      for (int s = n; s < NC; s++) check(got[s] == 0, "idle stream got data");
      // expected: min(1, 2n/R) beats per cycle, at least 85 % of it
      check(tp[n] >= 0.85 * ((2.0 * n / R) < 1.0 ? (2.0 * n / R) : 1.0),
            $sformatf("%0d streams: %0.2f beats/cycle", n, tp[n]));
      if (n > 1) check(tp[n] >= tp[n-1] * 0.97, $sformatf("%0d streams not slower than %0d", n, n - 1));
      repeat (20) @(negedge clk);
    end
    check(pf_valid == 1'b0, "no page fault");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
