// tlb: per-vFPGA translation lookaside buffer of the shell's memory
// management unit. The paper keeps the TLB in on-chip memory and leaves the
// page-table walk to the host driver: on a miss the shell raises a page fault
// and the driver installs the missing translation. Page size, number of sets
// and associativity are parameters, as the paper requires; default page size
// is 2 MB (the paper's baseline MMU, 1 GB is the other configuration it runs).
//
// Organisation (this design's choice): SETS x WAYS entries, indexed by the
// low bits of the virtual page number, tag = remaining page-number bits.
// Lookup: present vaddr with lk_valid & lk_ready; one cycle later rs_valid
// pulses with rs_hit and rs_paddr (page frame + page offset). Entries are
// written by the driver through wr_*; a write with wr_inval removes a
// matching entry and pulses inv_done. Replacement within a set is round-robin.
module tlb
  import coyote_pkg::*;
#(
  parameter int PAGE_BITS = 21,  // 2 MB pages
  parameter int SETS      = 16,
  parameter int WAYS      = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  // lookup
  input  logic               lk_valid,
  output logic               lk_ready,
  input  logic [VADDR_W-1:0] lk_vaddr,
  output logic               rs_valid,
  output logic               rs_hit,
  output logic [PADDR_W-1:0] rs_paddr,
  // driver update
  input  logic               wr_valid,
  input  logic               wr_inval,
  input  logic [VADDR_W-1:0] wr_vaddr,
  input  logic [PADDR_W-1:0] wr_paddr,
  output logic               inv_done
);
  localparam int SB   = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int WB   = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int VPN  = VADDR_W - PAGE_BITS;
  localparam int PFN  = PADDR_W - PAGE_BITS;
  localparam int TAGW = VPN - SB;

  typedef struct packed {
    logic            valid;
    logic [TAGW-1:0] tag;
    logic [PFN-1:0]  pfn;
  } entry_t;

  entry_t        mem [SETS][WAYS];
  logic [WB-1:0] repl [SETS];

  function automatic logic [SB-1:0] set_of(input logic [VADDR_W-1:0] va);
    return (SETS > 1) ? SB'(va[PAGE_BITS +: SB]) : '0;
  endfunction
  function automatic logic [TAGW-1:0] tag_of(input logic [VADDR_W-1:0] va);
    return va[VADDR_W-1 -: TAGW];
  endfunction

  // Lookup stage: registered result.
  assign lk_ready = !wr_valid;  // driver updates take priority
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs_valid <= 1'b0;
      rs_hit   <= 1'b0;
      rs_paddr <= '0;
    end else begin
      rs_valid <= lk_valid && lk_ready;
      if (lk_valid && lk_ready) begin
        rs_hit   <= 1'b0;
        rs_paddr <= '0;
        for (int w = 0; w < WAYS; w++) begin
          if (mem[set_of(lk_vaddr)][w].valid && mem[set_of(lk_vaddr)][w].tag == tag_of(lk_vaddr)) begin
            rs_hit   <= 1'b1;
            rs_paddr <= {mem[set_of(lk_vaddr)][w].pfn, lk_vaddr[PAGE_BITS-1:0]};
          end
        end
      end
    end
  end

  // Driver update: overwrite a matching entry, else fill the round-robin way.
  logic          wr_match;
  logic [WB-1:0] wr_way;
  always_comb begin
    wr_match = 1'b0;
    wr_way   = repl[set_of(wr_vaddr)];
    for (int w = 0; w < WAYS; w++) begin
      if (mem[set_of(wr_vaddr)][w].valid && mem[set_of(wr_vaddr)][w].tag == tag_of(wr_vaddr)) begin
        wr_match = 1'b1;
        wr_way   = WB'(w);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inv_done <= 1'b0;
      for (int s = 0; s < SETS; s++) begin
        repl[s] <= '0;
        for (int w = 0; w < WAYS; w++) mem[s][w] <= '0;
      end
    end else begin
      inv_done <= wr_valid && wr_inval;
      if (wr_valid) begin
        if (wr_inval) begin
          if (wr_match) mem[set_of(wr_vaddr)][wr_way].valid <= 1'b0;
        end else begin
          mem[set_of(wr_vaddr)][wr_way] <= '{valid: 1'b1, tag: tag_of(wr_vaddr),
                                             pfn: wr_paddr[PADDR_W-1:PAGE_BITS]};
          if (!wr_match)
            repl[set_of(wr_vaddr)] <= (WAYS > 1) ? WB'((int'(wr_way) + 1) % WAYS) : '0;
        end
      end
    end
  end
endmodule
