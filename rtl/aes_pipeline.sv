// aes_pipeline: AES-128 encryption core with one pipeline stage per round,
// ten stages as in the paper's AES core (stages 1-9: SubBytes, ShiftRows,
// MixColumns, AddRoundKey; stage 10 without MixColumns). The initial
// AddRoundKey is folded into the input of stage 1. Every block carries a
// thread id (ctid) through the pipeline so that results can be returned to
// the thread that issued them.
//
// Timing: a block presented with in_valid is at the output (out_valid,
// out_data, out_tid) exactly LAT = 10 cycles later; a new block may enter
// every cycle and the pipeline never stalls, so the consumer must always take
// the result. Round keys are expanded from `key` in the cycle key_load is
// high (one register stage for all eleven keys); blocks entering before the
// new keys are stored still use the old keys.
module aes_pipeline
  import aes_pkg::*;
#(
  parameter int TID_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             key_load,
  input  logic [127:0]     key,
  input  logic             in_valid,
  input  logic [127:0]     in_data,
  input  logic [TID_W-1:0] in_tid,
  output logic             out_valid,
  output logic [127:0]     out_data,
  output logic [TID_W-1:0] out_tid
);
  localparam int NR = 10;
  logic [127:0]     rk  [NR+1];
  logic [127:0]     st  [1:NR];
  logic             vld [1:NR];
  logic [TID_W-1:0] tid [1:NR];

  // Key schedule.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= NR; i++) rk[i] <= '0;
    end else if (key_load) begin
      logic [127:0] k;
      logic [7:0]   rc;
      k  = key;
      rc = 8'h01;
      rk[0] <= k;
      for (int i = 1; i <= NR; i++) begin
        k = next_key(k, rc);
        rk[i] <= k;
        rc = xtime(rc);
      end
    end
  end

  // Stage 0 is combinational: initial AddRoundKey.
  logic [127:0] st0;
  assign st0 = in_data ^ rk[0];

  for (genvar s = 1; s <= NR; s++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[s] <= 1'b0;
        st[s]  <= '0;
        tid[s] <= '0;
      end else begin
        vld[s] <= (s == 1) ? in_valid : vld[s-1];
        tid[s] <= (s == 1) ? in_tid   : tid[s-1];
        st[s]  <= aes_round((s == 1) ? st0 : st[s-1], rk[s], s == NR);
      end
    end
  end

  assign out_valid = vld[NR];
  assign out_data  = st[NR];
  assign out_tid   = tid[NR];
endmodule
