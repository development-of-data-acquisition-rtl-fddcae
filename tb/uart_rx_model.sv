// uart_rx_model: behavioural RS232 receiver for testbenches (not
// synthesizable). Waits for a start bit, samples each bit in its middle,
// checks the stop bit and pushes the byte onto its queue; framing errors are
// counted. CLKS_PER_BIT must match the transmitter.
module uart_rx_model #(
  parameter int CLKS_PER_BIT = 87
)(
  input logic clk,
  input logic rxd
);
  logic [7:0] bytes [$];
  int         frame_errors = 0;
  longint     start_cycle [$];   // cycle of each start-bit edge
  longint     cycle = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    logic [7:0] b;
    forever begin
      @(negedge rxd);
      start_cycle.push_back(cycle);
      repeat (CLKS_PER_BIT / 2) @(posedge clk);
      if (rxd != 1'b0) begin frame_errors++; continue; end
      for (int i = 0; i < 8; i++) begin
        repeat (CLKS_PER_BIT) @(posedge clk);
        b[i] = rxd;
      end
      repeat (CLKS_PER_BIT) @(posedge clk);
      if (rxd != 1'b1) frame_errors++;
      bytes.push_back(b);
    end
  end
endmodule
