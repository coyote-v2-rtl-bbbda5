// irq_ctrl: interrupt collection for the MSI-X channel to the host. The
// paper lists the sources: page faults, reconfiguration completions, TLB
// invalidations and interrupts raised by user applications, each with a
// value. Every source has a one-entry holding register (src_ready is low
// while it is occupied); occupied sources are sent round-robin as messages
// carrying the source's vector number and its 64-bit value, which the driver
// turns into the event it delivers to user space. The vector numbering is
// fixed by the instantiating design.
module irq_ctrl #(
  parameter int N_SRC = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_SRC-1:0]         src_valid,
  output logic [N_SRC-1:0]         src_ready,
  input  logic [N_SRC-1:0][63:0]   src_value,
  output logic                     irq_valid,
  input  logic                     irq_ready,
  output logic [7:0]               irq_vector,
  output logic [63:0]              irq_value
);
  localparam int IW = (N_SRC > 1) ? $clog2(N_SRC) : 1;
  logic [N_SRC-1:0]       pend, gnt;
  logic [63:0]            val [N_SRC];
  logic [IW-1:0]          gidx;
  logic                   gv, fire;

  rr_arbiter #(.N(N_SRC)) u_arb (
    .clk, .rst_n, .req(pend), .ack(fire), .gnt, .gnt_idx(gidx), .gnt_valid(gv));

  assign src_ready  = ~pend;
  assign irq_valid  = gv;
  assign irq_vector = 8'(gidx);
  assign irq_value  = val[gidx];
  assign fire       = gv && irq_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0;
      for (int i = 0; i < N_SRC; i++) val[i] <= '0;
    end else begin
      for (int i = 0; i < N_SRC; i++) begin
        if (fire && gnt[i]) pend[i] <= 1'b0;
        if (src_valid[i] && !pend[i]) begin
          pend[i] <= 1'b1;
          val[i]  <= src_value[i];
        end
      end
    end
  end
endmodule
