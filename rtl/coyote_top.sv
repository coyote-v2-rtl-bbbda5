// coyote_top: the shell with three vFPGAs, wired as static, dynamic and
// application layers.
//
//   static layer   host DMA engine ports (requests, host-to-card and
//                  card-to-host streams), shell control registers behind an
//                  AXI4-Lite port, completion write-back, MSI-X interrupts
//                  and the partial-reconfiguration controller (icap_ctrl).
//   dynamic layer  per vFPGA a vfpga_dma_path (send-queue arbitration,
//                  4 KB packetizer, TLB, credits, destination queues, HBM
//                  striping); host_arbiter sharing the host link round-robin;
//                  the sniffer's net_filter between network stack and MAC.
//   application    vFPGA 0: multi-threaded AES (aes_cbc_mt, one host stream
//                  per cThread); vFPGA 1: vector addition (vadd_app, host
//                  streams 0 and 1 in, stream 0 out); vFPGA 2: traffic
//                  sniffer (sniffer_app, card stream 0 out).
//
// Parts the shell builds on but does not design are outside this module and
// reached through ports: the host DMA engine, the HBM controllers (one request
// port per vFPGA; the channel travels with the request), the network stack
// (request/completion ports per vFPGA and one RX/TX frame stream) and the MAC.
//
// Shell control registers (64-bit, byte address 8*i), this design's map:
//   0 TLB virtual address       1 TLB physical address
//   2 TLB command: [3:0] vFPGA, [8] invalidate; writing it applies the update
//   3 write-back base address   4 write-back enable (bit 0)
//   5 reconfiguration length in bytes; writing it starts the controller
//   6 host request virtual address
//   7 host request: [27:0] length, [29:28] service, [35:32] stream,
//     [40] write, [51:48] vFPGA; writing it queues the request
//   8 (read-only) bit 0 reconfiguration busy, bits [3:1] host request of
//     vFPGA 0..2 still pending (a request written while pending is ignored)
// Interrupt vectors: i = page fault of vFPGA i (value: faulting address),
// 3+i = user interrupt of vFPGA i, 6 = reconfiguration done (value: length),
// 7 = TLB invalidation done (value: vFPGA).
// vFPGA 0 registers: 0/1 key low/high (writing 1 loads the key), 2/3 IV
// low/high, 4 bit 0 ECB mode. vFPGA 1 registers: 0 (read-only) sum beats
// produced; it raises a user interrupt at the end of every vector. vFPGA 2:
// see sniffer_app.
// Some output bits are constant by construction and stay so: the AXI4-Lite
// response codes (always OKAY), the ICAP read/write select (always write),
// the unused top bits of the stage-busy vector (10 stages in 16 bits), the
// high bits of card-memory addresses (the stripe index is divided by the
// channel count) and the top bits of packet lengths (at most 4 KB).
//
// Timing: everything runs on one clock. A host request travels through the
// shell registers, send-queue arbiter, packetizer, TLB and crediter in a few
// cycles; data then stream at one 512-bit beat per cycle per link.
// What follows the paper: the three layers, 4 KB packets interleaved
// round-robin, per-stream credits, TLB with driver fallback on a miss,
// HBM striping, write-back, interrupts, ICAP controller, network filter and
// sniffer. This design's own: the register and vector maps, the three fixed
// applications and all queue depths.
module coyote_top
  import coyote_pkg::*;
#(
  parameter int N_HSTRM   = 8,
  parameter int N_CSTRM   = 6,
  parameter int CRED      = 2,
  parameter int PAGE_BITS = 21,
  parameter int TLB_SETS  = 16,
  parameter int TLB_WAYS  = 4,
  parameter int N_CHAN    = 32
) (
  input  logic clk,
  input  logic rst_n,
  // shell and vFPGA control buses (host BARs)
  input  axil_req_t             shell_axi_req,
  output axil_rsp_t             shell_axi_rsp,
  input  axil_req_t [2:0]       user_axi_req,
  output axil_rsp_t [2:0]       user_axi_rsp,
  // host DMA engine
  output logic                  dma_valid,
  input  logic                  dma_ready,
  output dreq_t                 dma_req,
  input  logic                  h2c_valid,
  output logic                  h2c_ready,
  input  logic [DATA_W-1:0]     h2c_data,
  output logic                  c2h_valid,
  input  logic                  c2h_ready,
  output logic [DATA_W-1:0]     c2h_data,
  output logic                  c2h_last,
  input  logic                  wr_done,
  // completion write-back into host memory
  output logic                  wb_valid,
  input  logic                  wb_ready,
  output logic [PADDR_W-1:0]    wb_addr,
  output logic [31:0]           wb_data,
  // MSI-X interrupts
  output logic                  irq_valid,
  input  logic                  irq_ready,
  output logic [7:0]            irq_vector,
  output logic [63:0]           irq_value,
  // partial bitstream stream and ICAP
  input  logic                  rcfg_valid,
  output logic                  rcfg_ready,
  input  logic [DATA_W-1:0]     rcfg_data,
  output logic                  icap_csib,
  output logic                  icap_rdwrb,
  output logic [31:0]           icap_i,
  // card memory, one port per vFPGA
  output logic  [2:0]           card_req_valid,
  input  logic  [2:0]           card_req_ready,
  output dreq_t [2:0]           card_req,
  output logic  [2:0][(N_CHAN>1?$clog2(N_CHAN):1)-1:0] card_chan,
  input  logic  [2:0]           card_rd_valid,
  output logic  [2:0]           card_rd_ready,
  input  logic  [2:0][DATA_W-1:0] card_rd_data,
  output logic  [2:0]           card_wr_valid,
  input  logic  [2:0]           card_wr_ready,
  output logic  [2:0][DATA_W-1:0] card_wr_data,
  input  logic  [2:0]           card_wr_done,
  // network stack
  output logic  [2:0]           net_req_valid,
  input  logic  [2:0]           net_req_ready,
  output dreq_t [2:0]           net_req,
  input  logic  [2:0]           net_cpl_valid,
  input  cq_t   [2:0]           net_cpl,
  input  logic  [2:0]           net_cpl_last,
  input  logic                  stk_tx_valid,
  output logic                  stk_tx_ready,
  input  nbeat_t                stk_tx,
  output logic                  stk_rx_valid,
  output nbeat_t                stk_rx,
  output logic                  mac_tx_valid,
  input  logic                  mac_tx_ready,
  output nbeat_t                mac_tx,
  input  logic                  mac_rx_valid,
  input  nbeat_t                mac_rx,
  // observation
  output logic  [2:0]           stall,
  output logic  [15:0]          aes_busy_stages
);
  localparam int NR = 3;
  localparam int CHW = (N_CHAN > 1) ? $clog2(N_CHAN) : 1;

  // ================= static layer: shell control =================
  logic [8:0][63:0] sregs, sstat;
  logic [NR-1:0] hsq_pend, hsq_ready;
  logic [8:0]       swr;
  logic             icap_busy, icap_done;
  axil_regs #(.N_REGS(9), .RO_MASK(9'h100)) u_shell_regs (
    .clk, .rst_n, .axi_req(shell_axi_req), .axi_rsp(shell_axi_rsp),
    .regs(sregs), .wr_pulse(swr), .status(sstat));
  always_comb begin
    sstat    = '0;
    sstat[8] = {60'd0, hsq_pend, icap_busy};
  end

  // Host-issued requests: one holding register per vFPGA.
  sq_t           hsq_q  [NR];
  logic          hsq_wr [NR];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hsq_pend <= '0;
      for (int i = 0; i < NR; i++) begin hsq_q[i] <= '0; hsq_wr[i] <= 1'b0; end
    end else begin
      for (int i = 0; i < NR; i++) begin
        if (hsq_pend[i] && hsq_ready[i]) hsq_pend[i] <= 1'b0;
        if (swr[7] && int'(sregs[7][51:48]) == i && !hsq_pend[i]) begin
          hsq_pend[i]     <= 1'b1;
          hsq_q[i].vaddr  <= VADDR_W'(sregs[6]);
          hsq_q[i].len    <= sregs[7][27:0];
          hsq_q[i].strm   <= strm_e'(sregs[7][29:28]);
          hsq_q[i].dest   <= sregs[7][35:32];
          hsq_wr[i]       <= sregs[7][40];
        end
      end
    end
  end

  // Reconfiguration controller.
  icap_ctrl u_icap (
    .clk, .rst_n, .start(swr[5]), .length(sregs[5][31:0]),
    .s_valid(rcfg_valid), .s_ready(rcfg_ready), .s_data(rcfg_data),
    .icap_csib, .icap_rdwrb, .icap_i, .busy(icap_busy), .done(icap_done));

  // ================= dynamic layer =================
  logic  [NR-1:0] hreq_valid, hreq_ready;
  dreq_t [NR-1:0] hreq;
  logic  [NR-1:0] hrd_valid, hwr_pull, hwr_valid, hwr_cpl_valid;
  logic [DEST_W-1:0] hrd_dest, hwr_dest, hwr_cpl_dest;
  logic [DATA_W-1:0] hrd_data;
  logic              hrd_pkt_end, hrd_req_last, hwr_cpl_req_last;
  logic [NR-1:0][DATA_W-1:0] hwr_data;

  host_arbiter #(.N_REG(NR), .TAG_DEPTH(4 * NR * CRED)) u_harb (
    .clk, .rst_n, .req_valid(hreq_valid), .req_ready(hreq_ready), .req(hreq),
    .dma_valid, .dma_ready, .dma_req, .h2c_valid, .h2c_ready, .h2c_data,
    .c2h_valid, .c2h_ready, .c2h_data, .c2h_last, .wr_done,
    .rd_valid(hrd_valid), .rd_dest(hrd_dest), .rd_data(hrd_data), .rd_pkt_end(hrd_pkt_end),
    .rd_req_last(hrd_req_last), .wr_pull(hwr_pull), .wr_dest(hwr_dest), .wr_valid(hwr_valid),
    .wr_data(hwr_data), .wr_cpl_valid(hwr_cpl_valid), .wr_cpl_dest(hwr_cpl_dest),
    .wr_cpl_req_last(hwr_cpl_req_last));

  // vFPGA-side signals of every slice.
  logic  [NR-1:0]              sq_rd_valid, sq_rd_ready, sq_wr_valid, sq_wr_ready;
  sq_t   [NR-1:0]              sq_rd, sq_wr;
  logic  [NR-1:0][N_HSTRM-1:0] h_rx_valid, h_rx_ready, h_tx_valid, h_tx_ready;
  beat_t [NR-1:0][N_HSTRM-1:0] h_rx, h_tx;
  logic  [NR-1:0][N_CSTRM-1:0] c_rx_valid, c_rx_ready, c_tx_valid, c_tx_ready;
  beat_t [NR-1:0][N_CSTRM-1:0] c_rx, c_tx;
  logic  [NR-1:0]              pf_valid, tlb_inv_done;
  logic  [NR-1:0][VADDR_W-1:0] pf_vaddr;
  logic  [NR-1:0][3:0]         cq_valid;
  cq_t   [NR-1:0][3:0]         cq;
  logic  [NR-1:0][3:0]         cq_wr;

  for (genvar i = 0; i < NR; i++) begin : g_slice
    vfpga_dma_path #(
      .N_HSTRM(N_HSTRM), .N_CSTRM(N_CSTRM), .CRED(CRED), .PAGE_BITS(PAGE_BITS),
      .TLB_SETS(TLB_SETS), .TLB_WAYS(TLB_WAYS), .N_CHAN(N_CHAN), .VFID(VFID_W'(i))
    ) u_path (
      .clk, .rst_n,
      .sq_rd_valid(sq_rd_valid[i]), .sq_rd_ready(sq_rd_ready[i]), .sq_rd(sq_rd[i]),
      .sq_wr_valid(sq_wr_valid[i]), .sq_wr_ready(sq_wr_ready[i]), .sq_wr(sq_wr[i]),
      .hsq_valid(hsq_pend[i]), .hsq_ready(hsq_ready[i]), .hsq(hsq_q[i]), .hsq_wr(hsq_wr[i]),
      .tlb_wr_valid(swr[2] && int'(sregs[2][3:0]) == i), .tlb_wr_inval(sregs[2][8]),
      .tlb_wr_vaddr(VADDR_W'(sregs[0])), .tlb_wr_paddr(PADDR_W'(sregs[1])),
      .tlb_inv_done(tlb_inv_done[i]), .pf_valid(pf_valid[i]), .pf_vaddr(pf_vaddr[i]),
      .h_rx_valid(h_rx_valid[i]), .h_rx_ready(h_rx_ready[i]), .h_rx(h_rx[i]),
      .h_tx_valid(h_tx_valid[i]), .h_tx_ready(h_tx_ready[i]), .h_tx(h_tx[i]),
      .c_rx_valid(c_rx_valid[i]), .c_rx_ready(c_rx_ready[i]), .c_rx(c_rx[i]),
      .c_tx_valid(c_tx_valid[i]), .c_tx_ready(c_tx_ready[i]), .c_tx(c_tx[i]),
      .hreq_valid(hreq_valid[i]), .hreq_ready(hreq_ready[i]), .hreq(hreq[i]),
      .hrd_valid(hrd_valid[i]), .hrd_dest, .hrd_data, .hrd_pkt_end, .hrd_req_last,
      .hwr_pull(hwr_pull[i]), .hwr_dest, .hwr_valid(hwr_valid[i]), .hwr_data(hwr_data[i]),
      .hwr_cpl_valid(hwr_cpl_valid[i]), .hwr_cpl_dest, .hwr_cpl_req_last,
      .creq_valid(card_req_valid[i]), .creq_ready(card_req_ready[i]), .creq(card_req[i]),
      .creq_chan(card_chan[i]),
      .crd_valid(card_rd_valid[i]), .crd_ready(card_rd_ready[i]), .crd_data(card_rd_data[i]),
      .cwr_valid(card_wr_valid[i]), .cwr_ready(card_wr_ready[i]), .cwr_data(card_wr_data[i]),
      .cwr_done(card_wr_done[i]),
      .nreq_valid(net_req_valid[i]), .nreq_ready(net_req_ready[i]), .nreq(net_req[i]),
      .ncpl_valid(net_cpl_valid[i]), .ncpl(net_cpl[i]), .ncpl_req_last(net_cpl_last[i]),
      .cq_valid(cq_valid[i]), .cq(cq[i]), .stall(stall[i]));
    for (genvar k = 0; k < 4; k++) begin : g_cqwr
      assign cq_wr[i][k] = cq[i][k].wr;
    end
  end

  // Completion write-back.
  writeback_unit #(.N_REG(NR), .N_IN(4)) u_wb (
    .clk, .rst_n, .enable(sregs[4][0]), .base(PADDR_W'(sregs[3])),
    .cpl_valid(cq_valid), .cpl_wr(cq_wr), .wb_valid, .wb_ready, .wb_addr, .wb_data, .counters());

  // Interrupts.
  logic [NR-1:0]        uirq_valid, uirq_ready;
  logic [NR-1:0][63:0]  uirq_value;
  logic [2*NR+1:0]        src_valid, src_ready;
  logic [2*NR+1:0][63:0]  src_value;
  always_comb begin
    for (int i = 0; i < NR; i++) begin
      src_valid[i]      = pf_valid[i];
      src_value[i]      = 64'(pf_vaddr[i]);
      src_valid[NR + i] = uirq_valid[i];
      src_value[NR + i] = uirq_value[i];
      uirq_ready[i]     = src_ready[NR + i];
    end
    src_valid[2*NR]     = icap_done;
    src_value[2*NR]     = sregs[5];
    src_valid[2*NR + 1] = |tlb_inv_done;
    src_value[2*NR + 1] = '0;
    for (int i = 0; i < NR; i++) if (tlb_inv_done[i]) src_value[2*NR + 1] = 64'(i);
  end
  irq_ctrl #(.N_SRC(2*NR + 2)) u_irq (
    .clk, .rst_n, .src_valid, .src_ready, .src_value, .irq_valid, .irq_ready, .irq_vector, .irq_value);

  // ================= application layer =================
  // vFPGA 0: multi-threaded AES.
  logic [4:0][63:0] a_regs, a_stat;
  logic [4:0]       a_wr;
  assign a_stat = '0;
  axil_regs #(.N_REGS(5)) u_aes_regs (
    .clk, .rst_n, .axi_req(user_axi_req[0]), .axi_rsp(user_axi_rsp[0]),
    .regs(a_regs), .wr_pulse(a_wr), .status(a_stat));
  aes_cbc_mt #(.N_THR(N_HSTRM)) u_aes (
    .clk, .rst_n, .key_load(a_wr[1]), .key({a_regs[1], a_regs[0]}), .iv({a_regs[3], a_regs[2]}),
    .ecb(a_regs[4][0]),
    .s_valid(h_rx_valid[0]), .s_ready(h_rx_ready[0]), .s_beat(h_rx[0]),
    .m_valid(h_tx_valid[0]), .m_ready(h_tx_ready[0]), .m_beat(h_tx[0]),
    .busy_stages(aes_busy_stages));
  assign sq_rd_valid[0] = 1'b0;  assign sq_rd[0] = '0;
  assign sq_wr_valid[0] = 1'b0;  assign sq_wr[0] = '0;
  assign c_rx_ready[0]  = '0;
  assign c_tx_valid[0]  = '0;    assign c_tx[0] = '0;
  assign uirq_valid[0]  = 1'b0;  assign uirq_value[0] = '0;

  // vFPGA 1: vector addition.
  logic [0:0][63:0] v_regs, v_stat;
  logic [0:0]       v_wr;
  logic [63:0]      v_beats;
  logic             y_valid, y_ready;
  beat_t            y;
  axil_regs #(.N_REGS(1), .RO_MASK(1'b1)) u_vadd_regs (
    .clk, .rst_n, .axi_req(user_axi_req[1]), .axi_rsp(user_axi_rsp[1]),
    .regs(v_regs), .wr_pulse(v_wr), .status(v_stat));
  assign v_stat[0] = v_beats;
  vadd_app u_vadd (
    .clk, .rst_n,
    .a_valid(h_rx_valid[1][0]), .a_ready(h_rx_ready[1][0]), .a(h_rx[1][0]),
    .b_valid(h_rx_valid[1][1]), .b_ready(h_rx_ready[1][1]), .b(h_rx[1][1]),
    .y_valid, .y_ready, .y);
  always_comb begin
    h_tx_valid[1]    = '0;
    h_tx[1]          = '0;
    h_tx_valid[1][0] = y_valid;
    h_tx[1][0]       = y;
    y_ready          = h_tx_ready[1][0];
    h_rx_ready[1][N_HSTRM-1:2] = '0;
  end
  // user interrupt at the end of each result vector
  logic v_irq;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_beats <= '0; v_irq <= 1'b0;
    end else begin
      if (y_valid && y_ready) v_beats <= v_beats + 1;
      if (y_valid && y_ready && y.last) v_irq <= 1'b1;
      else if (uirq_ready[1]) v_irq <= 1'b0;
    end
  end
  assign uirq_valid[1] = v_irq;
  assign uirq_value[1] = v_beats;
  assign sq_rd_valid[1] = 1'b0;  assign sq_rd[1] = '0;
  assign sq_wr_valid[1] = 1'b0;  assign sq_wr[1] = '0;
  assign c_rx_ready[1]  = '0;
  assign c_tx_valid[1]  = '0;    assign c_tx[1] = '0;

  // vFPGA 2: traffic sniffer, with its filter in the dynamic layer.
  filt_cfg_t   fcfg;
  logic [31:0] fdrops;
  logic        rx_snf_valid, rx_snf_ready, tx_snf_valid, tx_snf_ready;
  nbeat_t      rx_snf, tx_snf;
  net_filter u_filter (
    .clk, .rst_n, .cfg(fcfg),
    .stk_tx_valid, .stk_tx_ready, .stk_tx, .mac_tx_valid, .mac_tx_ready, .mac_tx,
    .mac_rx_valid, .mac_rx, .stk_rx_valid, .stk_rx,
    .rx_snf_valid, .rx_snf_ready, .rx_snf, .tx_snf_valid, .tx_snf_ready, .tx_snf, .drops(fdrops));
  sniffer_app u_sniffer (
    .clk, .rst_n, .axi_req(user_axi_req[2]), .axi_rsp(user_axi_rsp[2]),
    .filt_cfg(fcfg), .filt_drops(fdrops),
    .rx_snf_valid, .rx_snf_ready, .rx_snf, .tx_snf_valid, .tx_snf_ready, .tx_snf,
    .sq_wr_valid(sq_wr_valid[2]), .sq_wr_ready(sq_wr_ready[2]), .sq_wr(sq_wr[2]),
    .c_tx_valid(c_tx_valid[2][0]), .c_tx_ready(c_tx_ready[2][0]), .c_tx(c_tx[2][0]));
  always_comb begin
    c_tx_valid[2][N_CSTRM-1:1] = '0;
    c_tx[2][N_CSTRM-1:1]       = '0;
  end
  assign sq_rd_valid[2] = 1'b0;  assign sq_rd[2] = '0;
  assign h_rx_ready[2]  = '0;
  assign h_tx_valid[2]  = '0;    assign h_tx[2] = '0;
  assign c_rx_ready[2]  = '0;
  assign uirq_valid[2]  = 1'b0;  assign uirq_value[2] = '0;
endmodule
