// writeback_unit: completion write-back. Instead of having software poll the
// card over PCIe, the shell keeps, for every vFPGA, a counter of completed
// read requests and one of completed write requests (host, card memory and
// network alike, as the paper extends write-back beyond the host DMA) and
// writes each counter into host memory whenever it changes.
//
// Counter c = 2*vfid + wr lives at host address base + 4*c (32-bit values;
// layout and width are this design's choice). Completions arrive as pulses,
// up to N_IN per vFPGA per cycle. A changed counter is marked dirty; dirty
// counters are written out round-robin on wb_* (one 32-bit host write each,
// carrying the counter's current value, so bursts coalesce). Nothing is
// written while `enable` is low.
module writeback_unit
  import coyote_pkg::*;
#(
  parameter int N_REG = 3,
  parameter int N_IN  = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        enable,
  input  logic [PADDR_W-1:0]          base,
  input  logic [N_REG-1:0][N_IN-1:0]  cpl_valid,
  input  logic [N_REG-1:0][N_IN-1:0]  cpl_wr,
  output logic                        wb_valid,
  input  logic                        wb_ready,
  output logic [PADDR_W-1:0]          wb_addr,
  output logic [31:0]                 wb_data,
  output logic [2*N_REG-1:0][31:0]    counters
);
  localparam int NC = 2 * N_REG;
  localparam int IW = (NC > 1) ? $clog2(NC) : 1;
  logic [NC-1:0] dirty, gnt;
  logic [IW-1:0] gidx;
  logic          gv, fire;

  rr_arbiter #(.N(NC)) u_arb (
    .clk, .rst_n, .req(enable ? dirty : '0), .ack(fire), .gnt, .gnt_idx(gidx), .gnt_valid(gv));

  assign wb_valid = gv;
  assign wb_addr  = base + PADDR_W'({gidx, 2'b00});
  assign wb_data  = counters[gidx];
  assign fire     = gv && wb_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      counters <= '0;
      dirty    <= '0;
    end else begin
      for (int r = 0; r < N_REG; r++)
        for (int w = 0; w < 2; w++) begin
          automatic logic [31:0] add = '0;
          for (int k = 0; k < N_IN; k++)
            if (cpl_valid[r][k] && int'(cpl_wr[r][k]) == w) add = add + 1;
          counters[2*r+w] <= counters[2*r+w] + add;
          if (add != 0) dirty[2*r+w] <= 1'b1;
          else if (fire && int'(gidx) == 2*r+w) dirty[2*r+w] <= 1'b0;
        end
    end
  end
endmodule
