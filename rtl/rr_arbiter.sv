// rr_arbiter: round-robin arbiter. The shell uses it to interleave the
// vFPGAs on a shared link and the AES application uses it to pick the next
// thread to feed the cipher pipeline; the paper names round-robin for both.
// `gnt` is a one-hot combinational grant among `req`, searched starting one
// past the last accepted winner. The priority pointer moves only when the
// grant is taken (`ack` high in the same cycle), so an unaccepted grant is held.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 req,
  input  logic                         ack,
  output logic [N-1:0]                 gnt,
  output logic [(N>1?$clog2(N):1)-1:0] gnt_idx,
  output logic                         gnt_valid
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;

  always_comb begin
    gnt = '0;
    gnt_idx = '0;
    gnt_valid = 1'b0;
    for (int k = 1; k <= N; k++) begin
      automatic int i = (int'(last) + k) % N;
      if (!gnt_valid && req[i]) begin
        gnt_valid = 1'b1;
        gnt_idx = IW'(i);
        gnt[i] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N-1);
    else if (ack && gnt_valid) last <= gnt_idx;
  end
endmodule
