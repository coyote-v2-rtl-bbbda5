// vadd_app: vector-addition application for one vFPGA, the paper's example
// of a kernel with several inputs: with parallel host streams the two
// operand vectors arrive on streams 0 and 1 without being packed together in
// software, and the sum leaves on stream 0. Elements are 32-bit integers,
// 16 per 512-bit beat (element type is this design's choice). One beat of
// each operand is consumed and one sum beat is produced per cycle whenever
// both operands are present and the output can take it; the output carries
// the `last` of operand A. Registered output (one cycle latency).
module vadd_app
  import coyote_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  a_valid,
  output logic  a_ready,
  input  beat_t a,
  input  logic  b_valid,
  output logic  b_ready,
  input  beat_t b,
  output logic  y_valid,
  input  logic  y_ready,
  output beat_t y
);
  localparam int NE = DATA_W / 32;
  logic take;
  assign take    = a_valid && b_valid && (!y_valid || y_ready);
  assign a_ready = take;
  assign b_ready = take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      y       <= '0;
    end else begin
      if (y_valid && y_ready) y_valid <= 1'b0;
      if (take) begin
        y_valid <= 1'b1;
        for (int i = 0; i < NE; i++) y.data[32*i +: 32] <= a.data[32*i +: 32] + b.data[32*i +: 32];
        y.tid  <= a.tid;
        y.last <= a.last;
      end
    end
  end
endmodule
