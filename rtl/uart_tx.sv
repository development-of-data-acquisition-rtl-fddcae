// uart_tx: RS232 transmitter carrying event packets to the host computer.
//
// Standard asynchronous framing, 8 data bits, no parity, one stop bit, least
// significant bit first, line idle high. CLKS_PER_BIT sets the baud rate:
// 87 clocks of 40 MHz give about 460 kbaud, enough for the 6000 events per
// second the serial link is expected to carry (7-byte packets, 10 bits per
// byte: 420 kbit/s). The baud rate and framing are this design's choices.
//
// Handshake: a byte is taken when in_valid and in_ready are both high; the
// transmitter is busy for 10 * CLKS_PER_BIT cycles per byte, and a byte
// offered in time follows the previous one with no idle time.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 87
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] in_data,
  output logic       in_ready,
  output logic       txd
);

  logic [9:0] shreg;        // {stop, data[7:0], start}
  logic [3:0] bits_left;
  logic [$clog2(CLKS_PER_BIT+1)-1:0] tick;

  logic last_tick;
  assign last_tick = tick == ($bits(tick))'(CLKS_PER_BIT - 1);
  // ready when idle, or in the last cycle of a stop bit so that bytes can
  // follow each other without a gap
  assign in_ready  = bits_left == '0 || (bits_left == 4'd1 && last_tick);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '1;
      bits_left <= '0;
      tick      <= '0;
      txd       <= 1'b1;
    end else if (in_ready && in_valid) begin
      shreg     <= {1'b1, in_data, 1'b0};
      bits_left <= 4'd10;
      tick      <= '0;
      txd       <= 1'b0;
    end else if (bits_left == '0) begin
      txd <= 1'b1;
    end else if (last_tick) begin
      tick      <= '0;
      bits_left <= bits_left - 1'b1;
      shreg     <= {1'b1, shreg[9:1]};
      txd       <= (bits_left == 4'd1) ? 1'b1 : shreg[1];
    end else begin
      tick <= tick + 1'b1;
    end
  end

endmodule
