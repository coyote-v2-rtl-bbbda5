// icap_ctrl: partial-reconfiguration controller. The paper loads partial
// bitstreams from host memory over a dedicated DMA stream and feeds the
// FPGA's internal configuration access port (ICAP) at its full rate, about
// 800 MB/s on UltraScale+, instead of the word-by-word register writes of
// older controllers. The ICAP is a 32-bit port; at one word per cycle and
// 200 MHz that is the 800 MB/s quoted (port width and clock are from the
// device family, not from the paper).
//
// Operation: software writes the bitstream length in bytes (`start`,
// `length`); 512-bit beats arrive on s_*; each beat is cut into 16 words,
// lowest word first, and written to the ICAP one per cycle (icap_csib and
// icap_rdwrb low). When `length` bytes have been written, `done` pulses,
// which the shell turns into a reconfiguration-completion interrupt. Words
// are passed unchanged: any bit ordering the ICAP needs is applied to the
// bitstream file by software (this design's choice).
module icap_ctrl
  import coyote_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [31:0]       length,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [DATA_W-1:0] s_data,
  output logic              icap_csib,
  output logic              icap_rdwrb,
  output logic [31:0]       icap_i,
  output logic              busy,
  output logic              done
);
  localparam int WPB = DATA_W / 32;
  logic [DATA_W-1:0] buf_q;
  logic [$clog2(WPB+1)-1:0] left;    // words left in buf_q
  logic [31:0]       words_left;     // words of the bitstream still to write
  logic              wr_now;

  assign s_ready    = busy && (left == '0);
  assign wr_now     = busy && (left != '0);
  assign icap_csib  = !wr_now;
  assign icap_rdwrb = !wr_now;
  assign icap_i     = buf_q[31:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0; left <= '0; words_left <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy       <= (length != 0);
        words_left <= (length + 32'd3) >> 2;
        left       <= '0;
      end else if (busy) begin
        if (left == '0) begin
          if (s_valid) begin
            buf_q <= s_data;
            left  <= (words_left < 32'(WPB)) ? ($bits(left))'(words_left) : ($bits(left))'(WPB);
          end
        end else begin
          buf_q      <= buf_q >> 32;
          left       <= left - 1'b1;
          words_left <= words_left - 1;
          if (words_left == 32'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
