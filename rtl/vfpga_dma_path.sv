// vfpga_dma_path: the dynamic-layer slice that serves one vFPGA. It turns
// the vFPGA's read/write send queues (and requests the host software issues
// on the vFPGA's behalf) into translated, credited 4 KB packets for the host
// link, the card memory and the network stack, and it owns the destination
// queues that decouple the vFPGA's data streams from the shared shell.
//
// Request path (per packet):
//   send queues --round-robin--> packetizer --> TLB lookup --> crediter -->
//   host link (to host_arbiter) | card memory (through mem_striping) | network
// A TLB miss raises a page fault (`pf_valid`, `pf_vaddr`) and holds the packet
// until the driver writes a translation, then the lookup is retried, as in
// the paper's hybrid MMU. The paper gives the ingredients (per-vFPGA MMU,
// packetization, per-stream credits on destination queues, completion
// queues); the order of the stages and the queue sizes are this design's.
//
// Data path: read data for stream d of the host (card) service land in queue
// rdq[d] and leave on h_rx (c_rx) to the vFPGA; a read packet's credit
// returns when its last beat has left the queue to the vFPGA, so a stream
// the vFPGA does not drain stalls only its own requests. Write data from h_tx (c_tx)
// wait in write queues until a granted write packet takes them. Read queues
// hold CRED packets, so a credited read can never block the shared link.
// Completion entries go back on cq (one port per service and direction) when
// the last packet of a request completes. The host link returns data in
// request order; card memory is assumed to do the same for one vFPGA.
// Some output bits are constant by construction: the high bits of striped
// card addresses and of packet lengths (packets are at most 4 KB).
module vfpga_dma_path
  import coyote_pkg::*;
#(
  parameter int              N_HSTRM   = 8,
  parameter int              N_CSTRM   = 6,
  parameter int              CRED      = 2,
  parameter int              PAGE_BITS = 21,
  parameter int              TLB_SETS  = 16,
  parameter int              TLB_WAYS  = 4,
  parameter int              N_CHAN    = 32,
  parameter logic [VFID_W-1:0] VFID    = '0
) (
  input  logic clk,
  input  logic rst_n,
  // send queues of the vFPGA
  input  logic  sq_rd_valid,
  output logic  sq_rd_ready,
  input  sq_t   sq_rd,
  input  logic  sq_wr_valid,
  output logic  sq_wr_ready,
  input  sq_t   sq_wr,
  // requests the host issues for this vFPGA
  input  logic  hsq_valid,
  output logic  hsq_ready,
  input  sq_t   hsq,
  input  logic  hsq_wr,
  // TLB maintenance by the driver, page faults to the driver
  input  logic               tlb_wr_valid,
  input  logic               tlb_wr_inval,
  input  logic [VADDR_W-1:0] tlb_wr_vaddr,
  input  logic [PADDR_W-1:0] tlb_wr_paddr,
  output logic               tlb_inv_done,
  output logic               pf_valid,
  output logic [VADDR_W-1:0] pf_vaddr,
  // vFPGA host streams
  output logic  [N_HSTRM-1:0] h_rx_valid,
  input  logic  [N_HSTRM-1:0] h_rx_ready,
  output beat_t [N_HSTRM-1:0] h_rx,
  input  logic  [N_HSTRM-1:0] h_tx_valid,
  output logic  [N_HSTRM-1:0] h_tx_ready,
  input  beat_t [N_HSTRM-1:0] h_tx,
  // vFPGA card streams
  output logic  [N_CSTRM-1:0] c_rx_valid,
  input  logic  [N_CSTRM-1:0] c_rx_ready,
  output beat_t [N_CSTRM-1:0] c_rx,
  input  logic  [N_CSTRM-1:0] c_tx_valid,
  output logic  [N_CSTRM-1:0] c_tx_ready,
  input  beat_t [N_CSTRM-1:0] c_tx,
  // host link (host_arbiter side)
  output logic              hreq_valid,
  input  logic              hreq_ready,
  output dreq_t             hreq,
  input  logic              hrd_valid,      // routed read beat
  input  logic [DEST_W-1:0] hrd_dest,
  input  logic [DATA_W-1:0] hrd_data,
  input  logic              hrd_pkt_end,
  input  logic              hrd_req_last,
  input  logic              hwr_pull,       // arbiter takes one write beat
  input  logic [DEST_W-1:0] hwr_dest,
  output logic              hwr_valid,
  output logic [DATA_W-1:0] hwr_data,
  input  logic              hwr_cpl_valid,  // host write packet done
  input  logic [DEST_W-1:0] hwr_cpl_dest,
  input  logic              hwr_cpl_req_last,
  // card memory
  output logic              creq_valid,
  input  logic              creq_ready,
  output dreq_t             creq,
  output logic [(N_CHAN>1?$clog2(N_CHAN):1)-1:0] creq_chan,
  input  logic              crd_valid,
  output logic              crd_ready,
  input  logic [DATA_W-1:0] crd_data,
  output logic              cwr_valid,
  input  logic              cwr_ready,
  output logic [DATA_W-1:0] cwr_data,
  input  logic              cwr_done,       // one pulse per write piece
  // network stack
  output logic              nreq_valid,
  input  logic              nreq_ready,
  output dreq_t             nreq,
  input  logic              ncpl_valid,     // network packet done
  input  cq_t               ncpl,
  input  logic              ncpl_req_last,
  // completion queues (0: host rd, 1: host wr, 2: card rd, 3: card wr / net)
  output logic [3:0]        cq_valid,
  output cq_t  [3:0]        cq,
  output logic              stall
);
  localparam int ND   = (N_HSTRM > N_CSTRM) ? N_HSTRM : N_CSTRM;
  localparam int QD   = CRED * PKT_BEATS;
  localparam int QCW  = $clog2(QD + 1);

  // destination read-queue entry: the beat and whether it ends a packet
  typedef struct packed {
    beat_t b;
    logic  pend;
  } rq_t;

  // ---------------- send queue arbitration ----------------
  logic [2:0] sq_req, sq_gnt;
  logic [1:0] sq_idx;
  logic       sq_any, pk_in_ready;
  dreq_t      sq_sel;

  assign sq_req = {hsq_valid, sq_wr_valid, sq_rd_valid};
  rr_arbiter #(.N(3)) u_sqarb (
    .clk, .rst_n, .req(sq_req), .ack(pk_in_ready), .gnt(sq_gnt), .gnt_idx(sq_idx), .gnt_valid(sq_any));

  always_comb begin
    sq_t s;
    s = (sq_idx == 2'd0) ? sq_rd : (sq_idx == 2'd1) ? sq_wr : hsq;
    sq_sel.addr = PADDR_W'(s.vaddr);
    sq_sel.len  = s.len;
    sq_sel.strm = s.strm;
    sq_sel.dest = s.dest;
    sq_sel.vfid = VFID;
    sq_sel.wr   = (sq_idx == 2'd1) || (sq_idx == 2'd2 && hsq_wr);
    sq_sel.last = 1'b1;
  end
  assign sq_rd_ready = sq_gnt[0] && pk_in_ready;
  assign sq_wr_ready = sq_gnt[1] && pk_in_ready;
  assign hsq_ready   = sq_gnt[2] && pk_in_ready;

  // ---------------- packetizer ----------------
  logic  pk_valid, pk_ready;
  dreq_t pk;
  packetizer u_pkt (
    .clk, .rst_n, .in_valid(sq_any), .in_ready(pk_in_ready), .in_req(sq_sel),
    .out_valid(pk_valid), .out_ready(pk_ready), .out_req(pk));

  // ---------------- translation ----------------
  typedef enum logic [1:0] {T_IDLE, T_LOOK, T_FAULT, T_OUT} tstate_e;
  tstate_e tst;
  logic  lk_ready, rs_valid, rs_hit;
  logic [PADDR_W-1:0] rs_paddr;
  dreq_t tr;
  logic  cr_in_ready;

  tlb #(.PAGE_BITS(PAGE_BITS), .SETS(TLB_SETS), .WAYS(TLB_WAYS)) u_tlb (
    .clk, .rst_n,
    .lk_valid(tst == T_IDLE && pk_valid), .lk_ready, .lk_vaddr(VADDR_W'(pk.addr)),
    .rs_valid, .rs_hit, .rs_paddr,
    .wr_valid(tlb_wr_valid), .wr_inval(tlb_wr_inval), .wr_vaddr(tlb_wr_vaddr),
    .wr_paddr(tlb_wr_paddr), .inv_done(tlb_inv_done));

  assign pk_ready = (tst == T_OUT) && cr_in_ready;
  assign pf_vaddr = VADDR_W'(pk.addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tst      <= T_IDLE;
      tr       <= '0;
      pf_valid <= 1'b0;
    end else begin
      pf_valid <= 1'b0;
      unique case (tst)
        T_IDLE:  if (pk_valid && lk_ready) tst <= T_LOOK;
        T_LOOK:  if (rs_valid) begin
                   if (rs_hit) begin
                     tr      <= pk;
                     tr.addr <= rs_paddr;
                     tst     <= T_OUT;
                   end else begin
                     pf_valid <= 1'b1;
                     tst      <= T_FAULT;
                   end
                 end
        T_FAULT: if (tlb_wr_valid && !tlb_wr_inval) tst <= T_IDLE;
        T_OUT:   if (cr_in_ready) tst <= T_IDLE;
        default: tst <= T_IDLE;
      endcase
    end
  end

  // ---------------- crediting ----------------
  logic  cr_out_valid, cr_out_ready;
  dreq_t cr_out;
  logic [3:0] cpl_v;
  cq_t  [3:0] cpl_e;
  logic [2:0][ND-1:0][15:0] wq_beats;
  logic [2:0][ND-1:0]       wq_pop;

  // Credit returns: writes and network packets when they complete, reads
  // when the packet's last beat leaves the destination queue to the vFPGA.
  localparam int NCR = 2 + N_HSTRM + N_CSTRM;
  logic [NCR-1:0]   crel_v;
  cq_t  [NCR-1:0]   crel_e;
  logic [N_HSTRM-1:0] h_rel;
  logic [N_CSTRM-1:0] c_rel;
  always_comb begin
    crel_v[0] = cpl_v[1];
    crel_e[0] = cpl_e[1];
    crel_v[1] = cpl_v[3];
    crel_e[1] = cpl_e[3];
    for (int d = 0; d < N_HSTRM; d++) begin
      crel_v[2 + d] = h_rel[d];
      crel_e[2 + d] = '{strm: STRM_HOST, dest: DEST_W'(d), wr: 1'b0};
    end
    for (int d = 0; d < N_CSTRM; d++) begin
      crel_v[2 + N_HSTRM + d] = c_rel[d];
      crel_e[2 + N_HSTRM + d] = '{strm: STRM_CARD, dest: DEST_W'(d), wr: 1'b0};
    end
  end

  crediter #(.N_DEST(ND), .CRED(CRED), .N_CPL(NCR)) u_cred (
    .clk, .rst_n, .in_valid(tst == T_OUT), .in_ready(cr_in_ready), .in_req(tr),
    .out_valid(cr_out_valid), .out_ready(cr_out_ready), .out_req(cr_out),
    .cpl_valid(crel_v), .cpl(crel_e), .wq_beats, .wq_pop, .stall);

  // Service demultiplexer.
  logic st_in_ready;
  assign hreq_valid   = cr_out_valid && cr_out.strm == STRM_HOST;
  assign nreq_valid   = cr_out_valid && cr_out.strm == STRM_NET;
  assign hreq         = cr_out;
  assign nreq         = cr_out;
  assign cr_out_ready = (cr_out.strm == STRM_HOST) ? hreq_ready :
                        (cr_out.strm == STRM_CARD) ? st_in_ready : nreq_ready;

  // ---------------- card memory: striping and tag queues ----------------
  typedef struct packed {
    logic [DEST_W-1:0] dest;
    logic [LEN_W-1:0]  beats;
    logic              pkt_end;
    logic              req_last;
  } ctag_t;

  logic  st_valid, st_pkt_end;
  dreq_t st_req;
  logic  crt_in_ready, cwt_in_ready;
  mem_striping #(.N_CHAN(N_CHAN)) u_stripe (
    .clk, .rst_n, .in_valid(cr_out_valid && cr_out.strm == STRM_CARD), .in_ready(st_in_ready),
    .in_req(cr_out), .out_valid(st_valid),
    .out_ready(creq_ready && (st_req.wr ? cwt_in_ready : crt_in_ready)),
    .out_req(st_req), .out_chan(creq_chan), .out_pkt_end(st_pkt_end));

  assign creq_valid = st_valid && (st_req.wr ? cwt_in_ready : crt_in_ready);
  assign creq       = st_req;

  ctag_t st_tag, crt, cwt;
  logic  crt_valid, cwt_valid, crt_pop, cwt_pop;
  assign st_tag = '{dest: st_req.dest, beats: beats_of(st_req.len), pkt_end: st_pkt_end,
                    req_last: st_req.last};

  fifo_sync #(.T(ctag_t), .DEPTH(2*CRED*ND)) u_crtag (
    .clk, .rst_n, .in_valid(st_valid && creq_ready && !st_req.wr), .in_ready(crt_in_ready),
    .in_data(st_tag), .out_valid(crt_valid), .out_ready(crt_pop), .out_data(crt), .count());
  fifo_sync #(.T(ctag_t), .DEPTH(2*CRED*ND)) u_cwtag (
    .clk, .rst_n, .in_valid(st_valid && creq_ready && st_req.wr), .in_ready(cwt_in_ready),
    .in_data(st_tag), .out_valid(cwt_valid), .out_ready(cwt_pop), .out_data(cwt), .count());

  // Card read data: count beats of the head tag.
  logic [LEN_W-1:0] crd_cnt;
  logic             crd_end;
  assign crd_ready = 1'b1;
  assign crd_end   = crd_valid && crt_valid && (crd_cnt + 1'b1 == crt.beats);
  assign crt_pop   = crd_end;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) crd_cnt <= '0;
    else if (crd_valid && crt_valid) crd_cnt <= crd_end ? '0 : crd_cnt + 1'b1;
  end

  // Card write data: stream the head tag's beats, then wait for the done pulse.
  logic [LEN_W-1:0] cwr_cnt;
  logic             cwr_fire, cwr_end, cwd_valid;
  ctag_t            cwd;
  logic [N_CSTRM-1:0] cwq_valid;
  beat_t [N_CSTRM-1:0] cwq;
  assign cwr_valid = cwt_valid && cwq_valid[cwt.dest];
  assign cwr_data  = cwq[cwt.dest].data;
  assign cwr_fire  = cwr_valid && cwr_ready;
  assign cwr_end   = cwr_fire && (cwr_cnt + 1'b1 == cwt.beats);
  assign cwt_pop   = cwr_end;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cwr_cnt <= '0;
    else if (cwr_fire) cwr_cnt <= cwr_end ? '0 : cwr_cnt + 1'b1;
  end
  fifo_sync #(.T(ctag_t), .DEPTH(2*CRED*ND)) u_cwdone (
    .clk, .rst_n, .in_valid(cwr_end), .in_ready(), .in_data(cwt),
    .out_valid(cwd_valid), .out_ready(cwr_done), .out_data(cwd), .count());

  // ---------------- destination and write queues ----------------
  logic [N_HSTRM-1:0] hwq_valid;
  beat_t [N_HSTRM-1:0] hwq;
  logic [N_HSTRM-1:0][QCW-1:0] hwq_cnt;
  logic [N_CSTRM-1:0][QCW-1:0] cwq_cnt;

  for (genvar d = 0; d < N_HSTRM; d++) begin : g_hq
    rq_t in_b, out_b;
    assign in_b = '{b: '{data: hrd_data, tid: TID_W'(d), last: hrd_pkt_end && hrd_req_last},
                    pend: hrd_pkt_end};
    fifo_sync #(.T(rq_t), .DEPTH(QD)) u_rdq (
      .clk, .rst_n, .in_valid(hrd_valid && int'(hrd_dest) == d), .in_ready(),
      .in_data(in_b), .out_valid(h_rx_valid[d]), .out_ready(h_rx_ready[d]), .out_data(out_b),
      .count());
    assign h_rx[d]  = out_b.b;
    assign h_rel[d] = h_rx_valid[d] && h_rx_ready[d] && out_b.pend;
    fifo_sync #(.T(beat_t), .DEPTH(QD)) u_wrq (
      .clk, .rst_n, .in_valid(h_tx_valid[d]), .in_ready(h_tx_ready[d]), .in_data(h_tx[d]),
      .out_valid(hwq_valid[d]), .out_ready(hwr_pull && int'(hwr_dest) == d),
      .out_data(hwq[d]), .count(hwq_cnt[d]));
  end
  assign hwr_valid = hwq_valid[hwr_dest];
  assign hwr_data  = hwq[hwr_dest].data;

  for (genvar d = 0; d < N_CSTRM; d++) begin : g_cq
    rq_t in_b, out_b;
    assign in_b = '{b: '{data: crd_data, tid: TID_W'(d), last: crd_end && crt.pkt_end && crt.req_last},
                    pend: crd_end && crt.pkt_end};
    fifo_sync #(.T(rq_t), .DEPTH(QD)) u_rdq (
      .clk, .rst_n, .in_valid(crd_valid && crt_valid && int'(crt.dest) == d), .in_ready(),
      .in_data(in_b), .out_valid(c_rx_valid[d]), .out_ready(c_rx_ready[d]), .out_data(out_b),
      .count());
    assign c_rx[d]  = out_b.b;
    assign c_rel[d] = c_rx_valid[d] && c_rx_ready[d] && out_b.pend;
    fifo_sync #(.T(beat_t), .DEPTH(QD)) u_wrq (
      .clk, .rst_n, .in_valid(c_tx_valid[d]), .in_ready(c_tx_ready[d]), .in_data(c_tx[d]),
      .out_valid(cwq_valid[d]), .out_ready(cwr_fire && int'(cwt.dest) == d),
      .out_data(cwq[d]), .count(cwq_cnt[d]));
  end

  always_comb begin
    wq_beats = '0;
    wq_pop   = '0;
    for (int d = 0; d < N_HSTRM; d++) begin
      wq_beats[STRM_HOST][d] = 16'(hwq_cnt[d]);
      wq_pop[STRM_HOST][d]   = hwr_pull && int'(hwr_dest) == d;
    end
    for (int d = 0; d < N_CSTRM; d++) begin
      wq_beats[STRM_CARD][d] = 16'(cwq_cnt[d]);
      wq_pop[STRM_CARD][d]   = cwr_fire && int'(cwt.dest) == d;
    end
  end

  // ---------------- completions ----------------
  // Port 3 is shared by card writes and the network; card writes win and a
  // network completion in the same cycle is delayed by one register stage.
  logic nq_valid, nq_last;
  cq_t  nq;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nq_valid <= 1'b0; nq <= '0; nq_last <= 1'b0;
    end else if (!(nq_valid && cwd_valid && cwr_done)) begin
      nq_valid <= ncpl_valid; nq <= ncpl; nq_last <= ncpl_req_last;
    end
  end
  always_ff @(posedge clk) begin
    if (rst_n) assert (!(ncpl_valid && nq_valid && cwd_valid && cwr_done))
      else $error("vfpga_dma_path: network completion lost");
  end

  logic cw_now;
  assign cw_now = cwd_valid && cwr_done;
  always_comb begin
    cpl_v[0] = hrd_valid && hrd_pkt_end;
    cpl_e[0] = '{strm: STRM_HOST, dest: hrd_dest, wr: 1'b0};
    cpl_v[1] = hwr_cpl_valid;
    cpl_e[1] = '{strm: STRM_HOST, dest: hwr_cpl_dest, wr: 1'b1};
    cpl_v[2] = crd_end && crt.pkt_end;
    cpl_e[2] = '{strm: STRM_CARD, dest: crt.dest, wr: 1'b0};
    cpl_v[3] = cw_now ? cwd.pkt_end : nq_valid;
    cpl_e[3] = cw_now ? '{strm: STRM_CARD, dest: cwd.dest, wr: 1'b1} : nq;
  end

  assign cq_valid[0] = cpl_v[0] && hrd_req_last;
  assign cq_valid[1] = cpl_v[1] && hwr_cpl_req_last;
  assign cq_valid[2] = cpl_v[2] && crt.req_last;
  assign cq_valid[3] = cw_now ? (cwd.pkt_end && cwd.req_last) : (nq_valid && nq_last);
  assign cq          = cpl_e;
endmodule
