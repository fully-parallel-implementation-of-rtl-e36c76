// solution_uart -- sends the Boolean solution to the host over a UART.
//
// What it does: on a `send` strobe it captures the NBITS-bit assignment and
// transmits it as ceil(NBITS/8) bytes, byte 0 first.  Byte k carries
// variables 8k..8k+7, variable 8k+j in data bit j; unused bits of the last
// byte are 0.  Each byte is one 8N1 frame: a start bit (0), eight data bits
// LSB first, one stop bit (1), each bit CLKS_PER_BIT clocks long.  txd idles
// high; busy is high from the clock after `send` until the last stop bit ends.
// A `send` while busy is ignored.
//
// The published design names only the UART link that returns the solution
// to the PC.  The framing, byte order and rate (default 115200 baud from a
// 125 MHz clock) are this design's own choices.
module solution_uart #(
  parameter int NBITS        = 150,
  parameter int CLKS_PER_BIT = 1085
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             send,
  input  logic [NBITS-1:0] bits,
  output logic             txd,
  output logic             busy
);

  localparam int NBYTES = (NBITS + 7) / 8;
  localparam int BW     = (NBYTES > 1) ? $clog2(NBYTES) : 1;
  localparam int CW     = (CLKS_PER_BIT > 1) ? $clog2(CLKS_PER_BIT) : 1;

  logic [NBYTES*8-1:0] buffer;
  logic [BW-1:0]       byte_idx;
  logic [3:0]          bit_idx;     // 0 start, 1..8 data, 9 stop
  logic [CW-1:0]       clk_cnt;
  logic [9:0]          frame;

  always_comb begin
    logic [7:0] b;
    b     = buffer[byte_idx*8 +: 8];
    frame = {1'b1, b, 1'b0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      buffer   <= '0;
      byte_idx <= '0;
      bit_idx  <= '0;
      clk_cnt  <= '0;
      txd      <= 1'b1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (send) begin
        busy     <= 1'b1;
        buffer   <= (NBYTES*8)'(bits);
        byte_idx <= '0;
        bit_idx  <= '0;
        clk_cnt  <= '0;
        txd      <= 1'b0;               // start bit of byte 0
      end
    end else if (clk_cnt != CW'(CLKS_PER_BIT - 1)) begin
      clk_cnt <= clk_cnt + 1'b1;
    end else begin
      clk_cnt <= '0;
      if (bit_idx != 4'd9) begin
        bit_idx <= bit_idx + 1'b1;
        txd     <= frame[bit_idx + 4'd1];
      end else if (byte_idx != BW'(NBYTES - 1)) begin
        byte_idx <= byte_idx + 1'b1;
        bit_idx  <= '0;
        txd      <= 1'b0;               // start bit of the next byte
      end else begin
        busy <= 1'b0;
        txd  <= 1'b1;
      end
    end
  end

endmodule
