// tb_uart_tx: sends random bytes back to back through the transmitter at its
// default rate and decodes the line with a model receiver: every byte must
// arrive intact and correctly framed, and consecutive start bits must be
// exactly 10 bit times apart.
module tb_uart_tx;
  localparam int CPB = 87;
  localparam int N   = 40;

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, txd;
  logic [7:0] in_data = '0;
  logic [7:0] sent [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  uart_tx dut (.*);
  uart_rx_model #(.CLKS_PER_BIT(CPB)) rx (.clk, .rxd(txd));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(txd == 1'b1, "idle high");
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_data  = 8'($urandom);
      do @(posedge clk); while (!in_ready);
      sent.push_back(in_data);
      @(negedge clk);
      in_valid = 0;
    end
    repeat (12 * CPB) @(posedge clk);
    check(rx.bytes.size() == N, "byte count");
    check(rx.frame_errors == 0, "framing");
    foreach (rx.bytes[i]) check(rx.bytes[i] == sent[i], "byte value");
    for (int i = 1; i < rx.start_cycle.size(); i++)
      check(rx.start_cycle[i] - rx.start_cycle[i-1] == 10 * CPB, "byte period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
