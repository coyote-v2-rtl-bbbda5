// mem_striping: maps a physical card-memory address onto the HBM channels.
// The paper stripes buffers across HBM banks to raise throughput but does not
// give the mapping. Here consecutive STRIPE-byte blocks go to consecutive
// channels: channel = (addr / STRIPE) mod N_CHAN, and the address inside the
// channel keeps the offset and the block number divided by N_CHAN. A request
// that spans several stripes is cut at stripe boundaries, one piece per
// cycle; with the 4 KB default stripe a 4 KB-aligned packet is never cut.
// N_CHAN = 32 is the HBM pseudo-channel count of the card used in the paper's
// evaluation (Alveo U55C); N_CHAN and STRIPE must be powers of two.
module mem_striping
  import coyote_pkg::*;
#(
  parameter int N_CHAN = 32,
  parameter int STRIPE = 4096
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  dreq_t in_req,
  output logic  out_valid,
  input  logic  out_ready,
  output dreq_t out_req,       // addr = address inside the channel
  output logic [(N_CHAN>1?$clog2(N_CHAN):1)-1:0] out_chan,
  output logic  out_pkt_end    // this piece ends the incoming request
);
  localparam int SB = $clog2(STRIPE);
  localparam int CB = (N_CHAN > 1) ? $clog2(N_CHAN) : 0;
  dreq_t cur;
  logic  busy;
  logic [LEN_W-1:0]   to_bound, chunk;
  logic [PADDR_W-1:0] blk;

  assign to_bound = LEN_W'(STRIPE) - LEN_W'(cur.addr[SB-1:0]);
  assign chunk    = (cur.len <= to_bound) ? cur.len : to_bound;
  assign blk      = cur.addr >> SB;

  assign in_ready  = !busy;
  assign out_valid = busy;
  always_comb begin
    out_req      = cur;
    out_req.len  = chunk;
    out_req.last = cur.last && (cur.len <= to_bound);
    out_req.addr = ((blk >> CB) << SB) | PADDR_W'(cur.addr[SB-1:0]);
    out_pkt_end  = (cur.len <= to_bound);
    out_chan     = (N_CHAN > 1) ? blk[$bits(out_chan)-1:0] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cur  <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        cur  <= in_req;
        busy <= (in_req.len != '0);
      end
    end else if (out_ready) begin
      cur.addr <= cur.addr + PADDR_W'(chunk);
      cur.len  <= cur.len - chunk;
      if (cur.len <= to_bound) busy <= 1'b0;
    end
  end
endmodule
