// fifo_sync: single-clock first-in first-out buffer, used for the shell's
// destination queues and tag queues. Storage is an array (maps to on-chip RAM
// or registers). Write when in_valid & in_ready, read when out_valid &
// out_ready; data written in one cycle is readable in the next. `count` gives
// the current fill level. Reset empties the queue.
module fifo_sync #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic push, pop;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push = in_valid & in_ready;
  assign pop  = out_valid & out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end
endmodule
