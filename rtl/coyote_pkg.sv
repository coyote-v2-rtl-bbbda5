// coyote_pkg: widths, constants and bundle types shared by the shell.
//
// The shell moves data in 512-bit beats (64 bytes) and cuts every transfer
// into 4 KB packets, both as in the paper. Address, length and identifier
// widths are not given there; the values below are this design's choice
// (48-bit virtual and physical addresses as on x86-64 hosts, 28-bit byte
// lengths, up to 16 vFPGAs and 16 streams per service).
package coyote_pkg;

  localparam int DATA_W    = 512;            // beat width (paper: 512-bit chunks)
  localparam int BEAT_B    = DATA_W / 8;     // bytes per beat
  localparam int PKT_B     = 4096;           // packet size (paper: 4 KB default)
  localparam int PKT_BEATS = PKT_B / BEAT_B; // 64 beats per packet
  localparam int VADDR_W   = 48;
  localparam int PADDR_W   = 48;
  localparam int LEN_W     = 28;
  localparam int VFID_W    = 4;
  localparam int DEST_W    = 4;
  localparam int TID_W     = 4;              // AXI stream TID (cThread id)

  // Service a request targets.
  typedef enum logic [1:0] {
    STRM_HOST = 2'd0,
    STRM_CARD = 2'd1,
    STRM_NET  = 2'd2
  } strm_e;

  // Entry of a read or write send queue (issued by a vFPGA or by the host).
  typedef struct packed {
    logic [VADDR_W-1:0] vaddr;
    logic [LEN_W-1:0]   len;     // bytes
    strm_e              strm;
    logic [DEST_W-1:0]  dest;    // stream index inside the vFPGA
  } sq_t;

  // Request travelling through the dynamic layer (one packet after packetizing).
  typedef struct packed {
    logic [PADDR_W-1:0] addr;    // virtual before the TLB, physical after it
    logic [LEN_W-1:0]   len;
    strm_e              strm;
    logic [DEST_W-1:0]  dest;
    logic [VFID_W-1:0]  vfid;
    logic               wr;      // 1: write (vFPGA to memory), 0: read
    logic               last;    // last packet of the original request
  } dreq_t;

  // Completion queue entry handed back to the vFPGA.
  typedef struct packed {
    strm_e             strm;
    logic [DEST_W-1:0] dest;
    logic              wr;
  } cq_t;

  // One beat of an AXI4 stream (valid/ready travel next to it).
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [TID_W-1:0]  tid;
    logic              last;
  } beat_t;

  // One beat of a network (Ethernet frame) stream; byte i of the frame in
  // data[8i+7:8i], keep marks valid bytes.
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [BEAT_B-1:0] keep;
    logic              last;
  } nbeat_t;

  // Traffic sniffer filter configuration (written by software).
  typedef struct packed {
    logic        rx_en;        // capture received frames
    logic        tx_en;        // capture transmitted frames
    logic        hdr_only;     // capture only the first beat (headers) of a frame
    logic        proto_en;     // require IPv4 protocol == proto
    logic [7:0]  proto;
    logic        port_en;      // require TCP/UDP destination port == port
    logic [15:0] port;
  } filt_cfg_t;

  // AXI4-Lite control bus, 64-bit data (the control registers of a vFPGA and
  // of the shell). Manager-to-subordinate and subordinate-to-manager halves.
  localparam int AXIL_AW = 16;
  typedef struct packed {
    logic               awvalid;
    logic [AXIL_AW-1:0] awaddr;
    logic               wvalid;
    logic [63:0]        wdata;
    logic [7:0]         wstrb;
    logic               bready;
    logic               arvalid;
    logic [AXIL_AW-1:0] araddr;
    logic               rready;
  } axil_req_t;
  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;
    logic [1:0]  bresp;
    logic        arready;
    logic        rvalid;
    logic [63:0] rdata;
    logic [1:0]  rresp;
  } axil_rsp_t;

  // Beats needed for a transfer of len bytes.
  function automatic logic [LEN_W-1:0] beats_of(input logic [LEN_W-1:0] len);
    return (len + LEN_W'(BEAT_B - 1)) >> $clog2(BEAT_B);
  endfunction

endpackage
