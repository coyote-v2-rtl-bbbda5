// aes_cbc_mt: multi-threaded AES encryption application for one vFPGA.
// In CBC mode every 128-bit block is XORed with the previous ciphertext
// block before encryption, so one message can have only one block inside the
// ten-stage AES pipeline at a time and nine stages idle. The paper's remedy
// (its AES CBC figure): each software thread (cThread) streams its text on a
// host stream of its own, tagged with its id in the AXI stream TID; a
// round-robin arbiter picks, each cycle, one thread whose previous block has
// left the pipeline; its block is XORed with that thread's last ciphertext
// and enters the pipeline; at the output the ciphertext is fed back to the
// thread's chaining register and demultiplexed to the thread's output
// stream. With T threads the pipeline holds up to T blocks.
//
// Interface: N_THR input and output streams of 512-bit beats; each beat is
// four blocks, lowest 128 bits first. The last beat of a message (`last`)
// ends the chain; the next message starts from the IV. The ciphertext beat
// goes out on the same thread's output with tid = thread number and the same
// `last`. Key, IV and mode come from the vFPGA's control registers (ecb = 1
// selects ECB, the mode of the paper's multi-tenant benchmark, where blocks
// are independent and a thread may issue one block per cycle).
//
// Timing: the core has a latency of 10 cycles and the ciphertext of a block
// is forwarded to the thread's next block in the cycle it leaves the
// pipeline, so one thread in CBC mode issues a block every 10 cycles and
// T <= 10 threads issue T blocks per 10 cycles. Output beats wait in a
// two-beat queue per thread; a thread issues only while the queue has room
// for every block it has in flight, so the pipeline never needs to stall.
module aes_cbc_mt
  import coyote_pkg::*;
#(
  parameter int N_THR = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                key_load,
  input  logic [127:0]        key,
  input  logic [127:0]        iv,
  input  logic                ecb,
  input  logic  [N_THR-1:0]   s_valid,
  output logic  [N_THR-1:0]   s_ready,
  input  beat_t [N_THR-1:0]   s_beat,
  output logic  [N_THR-1:0]   m_valid,
  input  logic  [N_THR-1:0]   m_ready,
  output beat_t [N_THR-1:0]   m_beat,
  output logic  [15:0]        busy_stages   // blocks inside the core (utilisation)
);
  localparam int IW  = (N_THR > 1) ? $clog2(N_THR) : 1;
  localparam int BPB = DATA_W / 128;  // blocks per beat

  // Per-thread state.
  logic [DATA_W-1:0] ib    [N_THR];   // input beat being issued
  logic              ib_last[N_THR];
  logic [2:0]        nb    [N_THR];   // blocks of ib still to issue
  logic [2:0]        ip    [N_THR];   // index of next block to issue
  logic [127:0]      chain [N_THR];
  logic              fresh [N_THR];   // next block starts a message
  logic [3:0]        infl  [N_THR];   // blocks in the pipeline
  logic [DATA_W-1:0] ob    [N_THR];   // ciphertext beat being collected
  logic [2:0]        oc    [N_THR];   // blocks collected
  logic              ol    [N_THR][2]; // last flags of beats in flight (ping-pong)
  logic              olw   [N_THR];
  logic              olr   [N_THR];
  logic [1:0]        oq_cnt[N_THR];

  // Pipeline.
  logic             p_in_valid, p_out_valid;
  logic [127:0]     p_in_data, p_out_data;
  logic [3:0]       p_in_tid, p_out_tid;

  aes_pipeline #(.TID_W(4)) u_core (
    .clk, .rst_n, .key_load, .key,
    .in_valid(p_in_valid), .in_data(p_in_data), .in_tid(p_in_tid),
    .out_valid(p_out_valid), .out_data(p_out_data), .out_tid(p_out_tid));

  // Eligibility and round-robin selection.
  logic [N_THR-1:0] elig, gnt;
  logic [IW-1:0]    gidx;
  logic             gv;
  logic [N_THR-1:0] ret;   // result of thread t leaves the pipeline now

  always_comb begin
    for (int t = 0; t < N_THR; t++) begin
      automatic int room = BPB * (2 - int'(oq_cnt[t])) - int'(oc[t]) - int'(infl[t]);
      ret[t]  = p_out_valid && int'(p_out_tid) == t;
      elig[t] = (nb[t] != 0) && (room > 0) &&
                (ecb || infl[t] == 0 || (infl[t] == 1 && ret[t]));
    end
  end

  rr_arbiter #(.N(N_THR)) u_arb (
    .clk, .rst_n, .req(elig), .ack(1'b1), .gnt, .gnt_idx(gidx), .gnt_valid(gv));

  always_comb begin
    logic [127:0] pt, prev;
    pt   = ib[gidx][128*ip[gidx] +: 128];
    prev = ret[gidx] ? p_out_data : chain[gidx];
    if (fresh[gidx]) prev = iv;
    p_in_valid = gv;
    p_in_data  = ecb ? pt : (pt ^ prev);
    p_in_tid   = 4'(gidx);
  end

  // Output queues.
  logic [N_THR-1:0] oq_push;
  beat_t [N_THR-1:0] oq_in;
  for (genvar t = 0; t < N_THR; t++) begin : g_thr
    logic [1:0] cnt;
    fifo_sync #(.T(beat_t), .DEPTH(2)) u_oq (
      .clk, .rst_n, .in_valid(oq_push[t]), .in_ready(), .in_data(oq_in[t]),
      .out_valid(m_valid[t]), .out_ready(m_ready[t]), .out_data(m_beat[t]), .count(cnt));
    assign oq_cnt[t] = cnt;
    assign s_ready[t] = (nb[t] == 0);
  end

  always_comb begin
    for (int t = 0; t < N_THR; t++) begin
      oq_push[t] = ret[t] && (oc[t] == 3'(BPB - 1));
      oq_in[t].data = ob[t];
      oq_in[t].data[128*(BPB-1) +: 128] = p_out_data;
      oq_in[t].tid  = TID_W'(t);
      oq_in[t].last = ol[t][olr[t]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < N_THR; t++) begin
        ib[t] <= '0; ib_last[t] <= 1'b0; nb[t] <= '0; ip[t] <= '0; chain[t] <= '0;
        fresh[t] <= 1'b1; infl[t] <= '0; ob[t] <= '0; oc[t] <= '0;
        ol[t][0] <= 1'b0; ol[t][1] <= 1'b0; olw[t] <= 1'b0; olr[t] <= 1'b0;
      end
    end else begin
      for (int t = 0; t < N_THR; t++) begin
        automatic logic iss = gv && int'(gidx) == t;
        // load a new input beat
        if (s_valid[t] && s_ready[t]) begin
          ib[t] <= s_beat[t].data;
          ib_last[t] <= s_beat[t].last;
          nb[t] <= 3'(BPB);
          ip[t] <= '0;
          ol[t][olw[t]] <= s_beat[t].last;
          olw[t] <= ~olw[t];
        end
        if (iss) begin
          nb[t] <= nb[t] - 1'b1;
          ip[t] <= ip[t] + 1'b1;
          fresh[t] <= (nb[t] == 3'd1) && ib_last[t];
        end
        infl[t] <= infl[t] + 4'(iss) - 4'(ret[t]);
        if (ret[t]) begin
          chain[t] <= p_out_data;
          ob[t][128*oc[t] +: 128] <= p_out_data;
          if (oc[t] == 3'(BPB - 1)) begin
            oc[t]  <= '0;
            olr[t] <= ~olr[t];
          end else begin
            oc[t] <= oc[t] + 1'b1;
          end
        end
      end
    end
  end

  // Utilisation: number of blocks inside the core.
  always_comb begin
    busy_stages = '0;
    for (int t = 0; t < N_THR; t++) busy_stages = busy_stages + 16'(infl[t]);
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(p_out_valid && int'(p_out_tid) >= N_THR)) else $error("aes_cbc_mt: bad tid");
  end
endmodule
