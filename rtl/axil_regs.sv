// axil_regs: AXI4-Lite register file. The paper's vFPGAs are controlled by
// software through an AXI4-Lite bus mapped into user space, ending in a set
// of control and status registers whose meaning the application defines; the
// shell's own control registers (TLB updates, write-back, reconfiguration)
// sit behind the same kind of bus. N_REGS 64-bit registers at byte address
// 8*i. Registers whose bit is set in RO_MASK are status registers: reads
// return `status[i]` and writes are ignored. A write is taken when address
// and data are both valid (one cycle, then the response); `wr_pulse[i]`
// marks the cycle in which register i was written, so a register can also
// act as a command. A read answers one cycle after the address. Responses
// are always OKAY; addresses beyond the file read as zero.
module axil_regs
  import coyote_pkg::*;
#(
  parameter int                 N_REGS  = 8,
  parameter logic [N_REGS-1:0]  RO_MASK = '0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  axil_req_t                axi_req,
  output axil_rsp_t                axi_rsp,
  output logic [N_REGS-1:0][63:0]  regs,
  output logic [N_REGS-1:0]        wr_pulse,
  input  logic [N_REGS-1:0][63:0]  status
);
  localparam int IW = (N_REGS > 1) ? $clog2(N_REGS) : 1;
  logic [63:0] ctl [N_REGS];
  logic        bvalid, rvalid;
  logic [63:0] rdata;
  logic        wr_take, rd_take;
  logic [AXIL_AW-4:0] widx, ridx;

  assign widx    = axi_req.awaddr[AXIL_AW-1:3];
  assign ridx    = axi_req.araddr[AXIL_AW-1:3];
  assign wr_take = axi_req.awvalid && axi_req.wvalid && !bvalid;
  assign rd_take = axi_req.arvalid && !rvalid;

  always_comb begin
    axi_rsp         = '0;
    axi_rsp.awready = wr_take;
    axi_rsp.wready  = wr_take;
    axi_rsp.bvalid  = bvalid;
    axi_rsp.arready = rd_take;
    axi_rsp.rvalid  = rvalid;
    axi_rsp.rdata   = rdata;
    for (int i = 0; i < N_REGS; i++) regs[i] = ctl[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid   <= 1'b0;
      rvalid   <= 1'b0;
      rdata    <= '0;
      wr_pulse <= '0;
      for (int i = 0; i < N_REGS; i++) ctl[i] <= '0;
    end else begin
      wr_pulse <= '0;
      if (bvalid && axi_req.bready) bvalid <= 1'b0;
      if (rvalid && axi_req.rready) rvalid <= 1'b0;
      if (wr_take) begin
        bvalid <= 1'b1;
        if (int'(widx) < N_REGS && !RO_MASK[IW'(widx)]) begin
          for (int b = 0; b < 8; b++)
            if (axi_req.wstrb[b]) ctl[IW'(widx)][8*b +: 8] <= axi_req.wdata[8*b +: 8];
          wr_pulse[IW'(widx)] <= 1'b1;
        end
      end
      if (rd_take) begin
        rvalid <= 1'b1;
        if (int'(ridx) >= N_REGS)   rdata <= '0;
        else if (RO_MASK[IW'(ridx)]) rdata <= status[IW'(ridx)];
        else                         rdata <= ctl[IW'(ridx)];
      end
    end
  end
endmodule
