// net_filter: network service of the traffic sniffer. It sits between the
// network stack and the 100G MAC and passes all traffic through unchanged in
// both directions (one register stage each way). When capture is enabled for
// a direction, frames that match the software-set filter are also copied to a
// sniff output that feeds the capturing vFPGA; with `hdr_only` only the first
// 64-byte beat of a frame, which holds its headers, is copied.
//
// Filter (this design's choice; the paper only says traffic is filtered on a
// user-set filter): the frame is an Ethernet II frame; optionally its IPv4
// protocol field (byte 23) must equal `proto` and optionally its TCP/UDP
// destination port (bytes 36-37, IPv4 without options) must equal `port`;
// RoCE v2 traffic, for instance, is UDP port 4791. The decision is taken on a
// frame's first beat. The copy never slows the main path: if the sniff output
// is not ready the beat and the rest of that frame are dropped, `drops`
// counts the frame, and a copy already begun is closed with an empty
// (keep = 0) last beat so that the capture stays frame-aligned. While such a
// closing beat waits, new copies are dropped too.
module net_filter
  import coyote_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  filt_cfg_t cfg,
  // stack -> MAC (TX)
  input  logic      stk_tx_valid,
  output logic      stk_tx_ready,
  input  nbeat_t    stk_tx,
  output logic      mac_tx_valid,
  input  logic      mac_tx_ready,
  output nbeat_t    mac_tx,
  // MAC -> stack (RX); the MAC cannot be back-pressured
  input  logic      mac_rx_valid,
  input  nbeat_t    mac_rx,
  output logic      stk_rx_valid,
  output nbeat_t    stk_rx,
  // copies to the sniffer
  output logic      rx_snf_valid,
  input  logic      rx_snf_ready,
  output nbeat_t    rx_snf,
  output logic      tx_snf_valid,
  input  logic      tx_snf_ready,
  output nbeat_t    tx_snf,
  output logic [31:0] drops
);
  function automatic logic match(input filt_cfg_t c, input nbeat_t b);
    logic ipv4, m;
    ipv4 = (b.data[8*12 +: 8] == 8'h08) && (b.data[8*13 +: 8] == 8'h00);
    m = 1'b1;
    if (c.proto_en) m = m && ipv4 && (b.data[8*23 +: 8] == c.proto);
    if (c.port_en)  m = m && ipv4 && ({b.data[8*36 +: 8], b.data[8*37 +: 8]} == c.port);
    return m;
  endfunction

  // ---- TX: register slice with copy ----
  logic   tx_first, tx_cap, tx_hv;
  nbeat_t tx_h;
  logic   tx_take;
  assign stk_tx_ready = !tx_hv || mac_tx_ready;
  assign tx_take      = stk_tx_valid && stk_tx_ready;
  assign mac_tx_valid = tx_hv;
  assign mac_tx       = tx_h;

  // Copy decision for the beat being taken.
  logic tx_cp, rx_cp, rx_first, rx_cap, tx_trunc, rx_trunc;
  always_comb begin
    tx_cp = tx_first ? (cfg.tx_en && match(cfg, stk_tx)) : (tx_cap && !cfg.hdr_only);
    rx_cp = rx_first ? (cfg.rx_en && match(cfg, mac_rx)) : (rx_cap && !cfg.hdr_only);
  end

  logic   tx_sv, rx_sv;
  nbeat_t tx_s, rx_s;
  assign tx_snf_valid = tx_sv;
  assign tx_snf       = tx_s;
  assign rx_snf_valid = rx_sv;
  assign rx_snf       = rx_s;

  logic [31:0] drop_tx, drop_rx;
  assign drops = drop_tx + drop_rx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_hv <= 1'b0; tx_h <= '0; tx_first <= 1'b1; tx_cap <= 1'b0;
      tx_sv <= 1'b0; tx_s <= '0; drop_tx <= '0; tx_trunc <= 1'b0;
    end else begin
      if (tx_hv && mac_tx_ready) tx_hv <= 1'b0;
      if (tx_sv && tx_snf_ready) tx_sv <= 1'b0;
      if (tx_trunc && (!tx_sv || tx_snf_ready)) begin
        // close a copy cut short by a drop with an empty last beat
        tx_sv    <= 1'b1;
        tx_s     <= '{data: '0, keep: '0, last: 1'b1};
        tx_trunc <= 1'b0;
      end
      if (tx_take) begin
        tx_hv    <= 1'b1;
        tx_h     <= stk_tx;
        tx_first <= stk_tx.last;
        if (tx_cp) begin
          if (!tx_trunc && (!tx_sv || tx_snf_ready)) begin
            tx_sv <= 1'b1;
            tx_s  <= stk_tx;
            if (cfg.hdr_only) tx_s.last <= 1'b1;
            tx_cap <= !stk_tx.last;
          end else begin
            tx_cap  <= 1'b0;
            drop_tx <= drop_tx + 1;
            if (!tx_first) tx_trunc <= 1'b1;
          end
        end else if (tx_first) begin
          tx_cap <= 1'b0;
        end
      end
    end
  end

  // ---- RX: pass-through register with copy ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stk_rx_valid <= 1'b0; stk_rx <= '0; rx_first <= 1'b1; rx_cap <= 1'b0;
      rx_sv <= 1'b0; rx_s <= '0; drop_rx <= '0; rx_trunc <= 1'b0;
    end else begin
      stk_rx_valid <= mac_rx_valid;
      if (mac_rx_valid) stk_rx <= mac_rx;
      if (rx_sv && rx_snf_ready) rx_sv <= 1'b0;
      if (rx_trunc && (!rx_sv || rx_snf_ready)) begin
        // close a copy cut short by a drop with an empty last beat
        rx_sv    <= 1'b1;
        rx_s     <= '{data: '0, keep: '0, last: 1'b1};
        rx_trunc <= 1'b0;
      end
      if (mac_rx_valid) begin
        rx_first <= mac_rx.last;
        if (rx_cp) begin
          if (!rx_trunc && (!rx_sv || rx_snf_ready)) begin
            rx_sv <= 1'b1;
            rx_s  <= mac_rx;
            if (cfg.hdr_only) rx_s.last <= 1'b1;
            rx_cap <= !mac_rx.last;
          end else begin
            rx_cap  <= 1'b0;
            drop_rx <= drop_rx + 1;
            if (!rx_first) rx_trunc <= 1'b1;
          end
        end else if (rx_first) begin
          rx_cap <= 1'b0;
        end
      end
    end
  end
endmodule
