// packetizer: cuts one request of arbitrary length into packets of at most
// PKT bytes (4 KB in the paper, configurable), so that the shell can
// interleave tenants packet by packet and count outstanding work in packets.
// Packet boundaries are aligned to PKT (this design's choice: an aligned
// packet never crosses a page, so each packet needs a single translation).
// The last packet of a request carries `last`. One packet leaves per cycle
// while out_ready is high; a new request is accepted once the previous one
// has been fully emitted.
module packetizer
  import coyote_pkg::*;
#(
  parameter int PKT = PKT_B
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  dreq_t in_req,
  output logic  out_valid,
  input  logic  out_ready,
  output dreq_t out_req
);
  localparam int PB = $clog2(PKT);
  dreq_t cur;
  logic  busy;
  logic [LEN_W-1:0] to_bound, chunk;

  // Bytes up to the next PKT boundary from the current address.
  assign to_bound = LEN_W'(PKT) - LEN_W'(cur.addr[PB-1:0]);
  assign chunk    = (cur.len <= to_bound) ? cur.len : to_bound;

  assign in_ready  = !busy;
  assign out_valid = busy;
  always_comb begin
    out_req      = cur;
    out_req.len  = chunk;
    out_req.last = (cur.len <= to_bound);
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
