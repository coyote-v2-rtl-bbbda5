// sniffer_app: the vFPGA half of the traffic sniffer. Software controls it
// through the vFPGA control bus (its control unit): it sets the filter used
// by the network-side net_filter, a capture buffer in card memory (virtual
// address and size) and starts and stops the capture. Frames copied by the
// filter are time-stamped, merged from the RX and TX directions into one
// record stream and written into the buffer through the vFPGA's card-memory
// stream and write send queue, so the shell's MMU translates the buffer's
// virtual addresses. Software later moves the buffer to host memory and
// converts it into a PCAP file.
//
// Registers (64-bit, byte address 8*i): 0 control (bit 0 capture on),
// 1 filter (filt_cfg_t, low bits), 2 buffer virtual address, 3 buffer size in
// bytes; read-only: 4 bytes written, 5 frames captured, 6 frames dropped
// (filter drops plus frames that did not fit), 7 bit 0 buffer full.
//
// Record format (this design's choice): one header beat, bits [63:0] the
// cycle count at the frame's first beat, [79:64] frame length in bytes,
// [80] direction (1 = TX), then the frame's beats as received (64 bytes each,
// the tail of the last one undefined). Each direction buffers a whole frame
// (up to FRAME_BEATS beats) before its record is emitted, so the header can
// carry the length; records of the two directions are interleaved
// round-robin, frame by frame. Every 4 KB of records produces one write
// request; stopping the capture flushes the partial last request. A record
// that would not fit in the buffer is dropped and the buffer marked full.
module sniffer_app
  import coyote_pkg::*;
#(
  parameter int FRAME_BEATS = 160   // 10 KB, enough for a 9000-byte jumbo frame
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t axi_req,
  output axil_rsp_t axi_rsp,
  output filt_cfg_t filt_cfg,
  input  logic [31:0] filt_drops,
  input  logic      rx_snf_valid,
  output logic      rx_snf_ready,
  input  nbeat_t    rx_snf,
  input  logic      tx_snf_valid,
  output logic      tx_snf_ready,
  input  nbeat_t    tx_snf,
  output logic      sq_wr_valid,
  input  logic      sq_wr_ready,
  output sq_t       sq_wr,
  output logic      c_tx_valid,
  input  logic      c_tx_ready,
  output beat_t     c_tx
);
  typedef struct packed {
    logic [63:0] ts;
    logic [15:0] len;
    logic [15:0] beats;
  } meta_t;

  // ---------------- control unit ----------------
  logic [7:0][63:0] regs, status;
  logic [7:0]       wr_pulse;
  logic [63:0]      bytes_wr, frames, own_drops;
  logic             full, on;

  axil_regs #(.N_REGS(8), .RO_MASK(8'hF0)) u_regs (
    .clk, .rst_n, .axi_req, .axi_rsp, .regs, .wr_pulse, .status);

  assign on       = regs[0][0];
  assign filt_cfg = on ? filt_cfg_t'(regs[1][$bits(filt_cfg_t)-1:0]) : '0;
  always_comb begin
    status    = '0;
    status[4] = bytes_wr;
    status[5] = frames;
    status[6] = own_drops + 64'(filt_drops);
    status[7] = {63'd0, full};
  end

  logic [63:0] now;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1;
  end

  // ---------------- per-direction frame buffers ----------------
  logic [1:0]  d_in_valid, d_in_ready, d_out_valid, d_out_ready;
  nbeat_t      d_in [2];
  nbeat_t      d_out [2];
  logic [1:0]  m_valid, m_ready;
  meta_t       m_in [2];
  meta_t       m_out [2];
  logic [15:0] cnt_len [2];
  logic [15:0] cnt_beats [2];
  logic [63:0] ts0 [2];

  assign d_in_valid = {tx_snf_valid, rx_snf_valid};
  assign d_in[0] = rx_snf;
  assign d_in[1] = tx_snf;
  logic [1:0]  mi_ready;     // meta FIFO has room for the frame's record
  assign rx_snf_ready = d_in_ready[0] && mi_ready[0];
  assign tx_snf_ready = d_in_ready[1] && mi_ready[1];

  for (genvar d = 0; d < 2; d++) begin : g_dir
    fifo_sync #(.T(nbeat_t), .DEPTH(FRAME_BEATS)) u_data (
      .clk, .rst_n, .in_valid(d_in_valid[d] && mi_ready[d]), .in_ready(d_in_ready[d]), .in_data(d_in[d]),
      .out_valid(d_out_valid[d]), .out_ready(d_out_ready[d]), .out_data(d_out[d]), .count());
    fifo_sync #(.T(meta_t), .DEPTH(4)) u_meta (
      .clk, .rst_n, .in_valid(d_in_valid[d] && d_in_ready[d] && mi_ready[d] && d_in[d].last),
      .in_ready(mi_ready[d]), .in_data(m_in[d]),
      .out_valid(m_valid[d]), .out_ready(m_ready[d]), .out_data(m_out[d]), .count());
    always_comb begin
      m_in[d].ts    = (cnt_beats[d] == 0) ? now : ts0[d];
      m_in[d].len   = cnt_len[d] + 16'($countones(d_in[d].keep));
      m_in[d].beats = cnt_beats[d] + 1'b1;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cnt_len[d] <= '0; cnt_beats[d] <= '0; ts0[d] <= '0;
      end else if (d_in_valid[d] && d_in_ready[d] && mi_ready[d]) begin
        if (cnt_beats[d] == 0) ts0[d] <= now;
        if (d_in[d].last) begin
          cnt_len[d] <= '0; cnt_beats[d] <= '0;
        end else begin
          cnt_len[d]   <= cnt_len[d] + 16'($countones(d_in[d].keep));
          cnt_beats[d] <= cnt_beats[d] + 1'b1;
        end
      end
    end
  end

  // ---------------- stream merger ----------------
  typedef enum logic [1:0] {M_IDLE, M_HDR, M_DATA, M_SKIP} mstate_e;
  mstate_e     ms;
  logic        cur;        // direction being emitted
  logic [15:0] left;
  logic [1:0]  gnt;
  logic        gidx, gv, start;
  logic [LEN_W-1:0] off, chunk_b;
  logic        fits;
  logic        rq_in_ready;
  logic        out_fire;

  rr_arbiter #(.N(2)) u_arb (
    .clk, .rst_n, .req(m_valid), .ack(start), .gnt, .gnt_idx(gidx), .gnt_valid(gv));

  assign fits  = (64'(off) + 64'(m_out[gidx].beats + 1'b1) * BEAT_B) <= regs[3];
  assign start = (ms == M_IDLE) && gv;

  always_comb begin
    c_tx_valid = 1'b0;
    c_tx       = '0;
    if (ms == M_HDR) begin
      c_tx_valid = rq_in_ready;
      c_tx.data[63:0]  = m_out[cur].ts;
      c_tx.data[79:64] = m_out[cur].len;
      c_tx.data[80]    = cur;
    end else if (ms == M_DATA) begin
      c_tx_valid = d_out_valid[cur] && rq_in_ready;
      c_tx.data  = d_out[cur].data;
    end
  end
  assign out_fire = c_tx_valid && c_tx_ready;

  always_comb begin
    d_out_ready = '0;
    m_ready     = '0;
    if (ms == M_DATA) d_out_ready[cur] = out_fire;
    if (ms == M_SKIP) d_out_ready[cur] = 1'b1;
    if (ms == M_DATA) m_ready[cur] = (left == 1) && out_fire;
    if (ms == M_SKIP) m_ready[cur] = (left == 1) && d_out_valid[cur];
  end

  // ---------------- memory access ----------------
  logic        rq_push, flush;
  sq_t         rq;
  assign flush = !on && (ms == M_IDLE) && (chunk_b != 0) && rq_in_ready;
  assign rq_push = (out_fire && (chunk_b + BEAT_B == PKT_B)) || flush;
  always_comb begin
    rq.vaddr = VADDR_W'(regs[2]) + VADDR_W'(off) - VADDR_W'(chunk_b);
    rq.len   = flush ? chunk_b : LEN_W'(PKT_B);
    rq.strm  = STRM_CARD;
    rq.dest  = '0;
  end
  fifo_sync #(.T(sq_t), .DEPTH(4)) u_rq (
    .clk, .rst_n, .in_valid(rq_push), .in_ready(rq_in_ready), .in_data(rq),
    .out_valid(sq_wr_valid), .out_ready(sq_wr_ready), .out_data(sq_wr), .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ms <= M_IDLE; cur <= 1'b0; left <= '0; off <= '0; chunk_b <= '0;
      bytes_wr <= '0; frames <= '0; own_drops <= '0; full <= 1'b0;
    end else begin
      if (wr_pulse[2] || wr_pulse[3]) begin
        off <= '0; full <= 1'b0; bytes_wr <= '0;
      end
      if (flush) chunk_b <= '0;
      unique case (ms)
        M_IDLE: if (start) begin
          cur  <= gidx;
          left <= m_out[gidx].beats;
          if (on && fits) ms <= M_HDR;
          else begin
            ms <= M_SKIP;
            own_drops <= own_drops + 1;
            if (on) full <= 1'b1;
          end
        end
        M_HDR:  if (out_fire) ms <= M_DATA;
        M_DATA: if (out_fire && left == 1) begin
          ms <= M_IDLE;
          frames <= frames + 1;
        end
        M_SKIP: if (d_out_valid[cur] && left == 1) ms <= M_IDLE;
        default: ms <= M_IDLE;
      endcase
      if ((ms == M_DATA && out_fire) || (ms == M_SKIP && d_out_valid[cur])) left <= left - 1'b1;
      if (out_fire) begin
        off      <= off + LEN_W'(BEAT_B);
        bytes_wr <= bytes_wr + BEAT_B;
        chunk_b  <= (chunk_b + BEAT_B == PKT_B) ? '0 : chunk_b + LEN_W'(BEAT_B);
      end
    end
  end
endmodule
