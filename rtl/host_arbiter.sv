// host_arbiter: shares the host (PCIe/DMA) link among the vFPGAs. It is the
// "arbitration" and command routing of the paper's shell: packets of all
// vFPGAs are interleaved round-robin, one 4 KB packet per grant, so each
// tenant gets an equal share of a bandwidth-limited link, and the data that
// come back are routed to the vFPGA and stream that asked for them.
//
// Requests leave on dma_req (physical address, length, direction). Read data
// come back on h2c in request order (as the host DMA engine delivers them);
// a queue of read tags tells which vFPGA and stream each beat belongs to and
// where a packet ends. For a granted write the arbiter pulls the packet's
// beats from that vFPGA's write queue onto c2h, then waits for the host
// engine's wr_done pulse (one per packet, in order) and hands it back as a
// write completion. h2c is never back-pressured: the vFPGA's credits
// guarantee room for every read it was granted.
// Data beats pass straight through (read data to the vFPGAs, write data to
// the DMA engine); only their routing and handshakes are logic here.
module host_arbiter
  import coyote_pkg::*;
#(
  parameter int N_REG    = 3,
  parameter int TAG_DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  // packets from the vFPGA slices
  input  logic  [N_REG-1:0] req_valid,
  output logic  [N_REG-1:0] req_ready,
  input  dreq_t [N_REG-1:0] req,
  // to the host DMA engine
  output logic              dma_valid,
  input  logic              dma_ready,
  output dreq_t             dma_req,
  input  logic              h2c_valid,
  output logic              h2c_ready,
  input  logic [DATA_W-1:0] h2c_data,
  output logic              c2h_valid,
  input  logic              c2h_ready,
  output logic [DATA_W-1:0] c2h_data,
  output logic              c2h_last,
  input  logic              wr_done,
  // read data routed to the slices
  output logic [N_REG-1:0]  rd_valid,
  output logic [DEST_W-1:0] rd_dest,
  output logic [DATA_W-1:0] rd_data,
  output logic              rd_pkt_end,
  output logic              rd_req_last,
  // write data pulled from the slices
  output logic [N_REG-1:0]  wr_pull,
  output logic [DEST_W-1:0] wr_dest,
  input  logic [N_REG-1:0]  wr_valid,
  input  logic [N_REG-1:0][DATA_W-1:0] wr_data,
  // write completions
  output logic [N_REG-1:0]  wr_cpl_valid,
  output logic [DEST_W-1:0] wr_cpl_dest,
  output logic              wr_cpl_req_last
);
  localparam int IW = (N_REG > 1) ? $clog2(N_REG) : 1;

  typedef struct packed {
    logic [VFID_W-1:0] vfid;
    logic [DEST_W-1:0] dest;
    logic [LEN_W-1:0]  beats;
    logic              req_last;
  } tag_t;

  logic [N_REG-1:0] gnt;
  logic [IW-1:0]    gidx;
  logic             gv, rt_rdy, wt_rdy, fire;
  dreq_t            sel;

  rr_arbiter #(.N(N_REG)) u_arb (
    .clk, .rst_n, .req(req_valid), .ack(fire), .gnt, .gnt_idx(gidx), .gnt_valid(gv));

  assign sel       = req[gidx];
  assign dma_valid = gv && (sel.wr ? wt_rdy : rt_rdy);
  assign dma_req   = sel;
  assign fire      = dma_valid && dma_ready;
  assign req_ready = fire ? gnt : '0;

  tag_t ntag, rt, wt, wd;
  logic rt_v, wt_v, wd_v, rt_pop, wt_pop;
  assign ntag = '{vfid: sel.vfid, dest: sel.dest, beats: beats_of(sel.len), req_last: sel.last};

  fifo_sync #(.T(tag_t), .DEPTH(TAG_DEPTH)) u_rtag (
    .clk, .rst_n, .in_valid(fire && !sel.wr), .in_ready(rt_rdy), .in_data(ntag),
    .out_valid(rt_v), .out_ready(rt_pop), .out_data(rt), .count());
  fifo_sync #(.T(tag_t), .DEPTH(TAG_DEPTH)) u_wtag (
    .clk, .rst_n, .in_valid(fire && sel.wr), .in_ready(wt_rdy), .in_data(ntag),
    .out_valid(wt_v), .out_ready(wt_pop), .out_data(wt), .count());

  // Read data routing.
  logic [LEN_W-1:0] rcnt;
  logic             rfire;
  assign h2c_ready   = rt_v;
  assign rfire       = h2c_valid && rt_v;
  assign rd_dest     = rt.dest;
  assign rd_data     = h2c_data;
  assign rd_pkt_end  = (rcnt + 1'b1 == rt.beats);
  assign rd_req_last = rt.req_last;
  assign rt_pop      = rfire && rd_pkt_end;
  always_comb begin
    rd_valid = '0;
    if (rfire && int'(rt.vfid) < N_REG) rd_valid[rt.vfid] = 1'b1;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rcnt <= '0;
    else if (rfire) rcnt <= rd_pkt_end ? '0 : rcnt + 1'b1;
  end

  // Write data collection.
  logic [LEN_W-1:0] wcnt;
  logic             wsrc_v, wfire, wend, wd_room;
  assign wsrc_v    = wt_v && wd_room && int'(wt.vfid) < N_REG && wr_valid[wt.vfid[IW-1:0]];
  assign c2h_valid = wsrc_v;
  assign c2h_data  = wr_data[wt.vfid[IW-1:0]];
  assign wfire     = wsrc_v && c2h_ready;
  assign wend      = wfire && (wcnt + 1'b1 == wt.beats);
  assign c2h_last  = (wcnt + 1'b1 == wt.beats);
  assign wt_pop    = wend;
  assign wr_dest   = wt.dest;
  always_comb begin
    wr_pull = '0;
    if (wfire) wr_pull[wt.vfid[IW-1:0]] = 1'b1;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wcnt <= '0;
    else if (wfire) wcnt <= wend ? '0 : wcnt + 1'b1;
  end

  // Write completions, in order.
  fifo_sync #(.T(tag_t), .DEPTH(TAG_DEPTH)) u_wdone (
    .clk, .rst_n, .in_valid(wend), .in_ready(wd_room), .in_data(wt),
    .out_valid(wd_v), .out_ready(wr_done), .out_data(wd), .count());
  always_comb begin
    wr_cpl_valid = '0;
    if (wd_v && wr_done) wr_cpl_valid[wd.vfid[IW-1:0]] = 1'b1;
  end
  assign wr_cpl_dest     = wd.dest;
  assign wr_cpl_req_last = wd.req_last;
endmodule
