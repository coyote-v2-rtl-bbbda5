// crediter: per-vFPGA credit check in front of the dynamic layer. The paper
// keeps an untrusted vFPGA from back-pressuring the shared shell: a request
// is passed on only if its destination queue has room, otherwise it is
// stalled, pushing back on the vFPGA alone. Credits come back when earlier
// requests complete. There is an independent counter for every service
// (host, card, network), direction and data stream, as in the paper.
//
// This design's realisation: a read packet needs one credit of its
// (service, dest); the destination queue holds CRED packets, so CRED credits
// exist per stream. A write packet needs one credit as well, and in addition
// its data must already wait in the vFPGA's write queue (`wq_beats`), which
// stops an application from opening a write and then not supplying data
// (network writes are exempt: their data go straight to the network stack).
// Beats promised to granted writes are reserved until they leave the queue
// (`wq_pop`). Each of the N_CPL completion ports (`cpl_valid`, `cpl`) returns one credit. The check
// is combinational on the head request; `stall` is high while a present
// request is held for lack of credit.
// The request itself passes through unchanged (out_req is in_req): the
// crediter only decides when the handshake may complete.
module crediter
  import coyote_pkg::*;
#(
  parameter int N_DEST = 4,
  parameter int CRED   = 2,
  parameter int N_CPL  = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  dreq_t in_req,
  output logic  out_valid,
  input  logic  out_ready,
  output dreq_t out_req,
  // packet completions
  input  logic [N_CPL-1:0]  cpl_valid,
  input  cq_t  [N_CPL-1:0]  cpl,
  // write queues: fill level and beat-taken pulses, per service and stream
  input  logic [2:0][N_DEST-1:0][15:0] wq_beats,
  input  logic [2:0][N_DEST-1:0]       wq_pop,
  output logic                   stall
);
  localparam int CW = $clog2(CRED + 1);
  logic [CW-1:0] cred [2][3][N_DEST];
  logic [15:0]   resv [3][N_DEST];
  logic          ok;
  logic [15:0]   need;
  int            s, d;

  always_comb begin
    s    = int'(in_req.strm);
    d    = int'(in_req.dest);
    need = 16'(beats_of(in_req.len));
    ok   = (s < 3) && (d < N_DEST) && (cred[in_req.wr][s][d] != '0);
    if (ok && in_req.wr && in_req.strm != STRM_NET) ok = (wq_beats[s][d] >= resv[s][d] + need);
  end

  assign out_valid = in_valid && ok;
  assign in_ready  = out_ready && ok;
  assign out_req   = in_req;
  assign stall     = in_valid && !ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < 2; r++)
        for (int a = 0; a < 3; a++)
          for (int b = 0; b < N_DEST; b++) cred[r][a][b] <= CW'(CRED);
      for (int a = 0; a < 3; a++)
        for (int b = 0; b < N_DEST; b++) resv[a][b] <= '0;
    end else begin
      for (int r = 0; r < 2; r++)
        for (int a = 0; a < 3; a++)
          for (int b = 0; b < N_DEST; b++) begin
            automatic logic take = in_valid && in_ready && int'(in_req.wr) == r && s == a && d == b;
            automatic logic [CW-1:0] give = '0;
            for (int c = 0; c < N_CPL; c++)
              if (cpl_valid[c] && int'(cpl[c].wr) == r && int'(cpl[c].strm) == a && int'(cpl[c].dest) == b)
                give = give + 1'b1;
            cred[r][a][b] <= cred[r][a][b] - CW'(take) + give;
          end
      for (int a = 0; a < 3; a++)
        for (int b = 0; b < N_DEST; b++) begin
          automatic logic [15:0] add = (in_valid && in_ready && in_req.wr && in_req.strm != STRM_NET && s == a && d == b) ? need : '0;
          resv[a][b] <= resv[a][b] + add - 16'(wq_pop[a][b]);
        end
    end
  end

  // Credits never exceed the queue size.
  always_ff @(posedge clk) begin
    if (rst_n)
      for (int r = 0; r < 2; r++)
        for (int a = 0; a < 3; a++)
          for (int b = 0; b < N_DEST; b++)
            assert (cred[r][a][b] <= CW'(CRED)) else $error("crediter: credit overflow");
  end
endmodule
