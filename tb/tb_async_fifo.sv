// tb_async_fifo: pushes random words through the clock-crossing FIFO with
// unrelated write and read clocks (write 7 ns half period, read 5 ns) and
// random enables on both sides, so that it runs full and empty many times.
// Every word written while not full must come out once, in order; reads
// happen only while not empty. Checks also that full and empty were both
// seen and that the FIFO holds its whole depth of eight before full.
module tb_async_fifo;
  localparam int W = 16, AW = 3;

  logic rst_n = 0, wclk = 0, rclk = 0;
  logic wen = 0, ren = 0, full, empty;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] sb [$];
  int checks = 0, failures = 0;
  int n_wr = 0, n_rd = 0, n_full = 0, n_empty = 0, max_level = 0;
  bit fast_reader = 1;

  always #7 wclk = ~wclk;
  always #5 rclk = ~rclk;

  async_fifo #(.W(W), .AW(AW)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Both sides decide on the falling edge of their clock, where full,
  // empty and rdata are stable until the rising edge that acts on them.
  always @(negedge wclk) begin
    wen   = rst_n && n_wr < 3000 && ($urandom % 4 != 0);
    wdata = W'($urandom);
    if (wen && !full) begin
      sb.push_back(wdata);
      n_wr++;
    end
    if (full) n_full++;
    if (sb.size() > max_level) max_level = sb.size();
  end

  always @(negedge rclk) begin
    ren = rst_n && ($urandom % (fast_reader ? 2 : 9) == 0);
    if (ren && !empty) begin
      check(sb.size() > 0 && rdata == sb.pop_front(), "data in order");
      n_rd++;
    end
    if (rst_n && empty) n_empty++;
  end

  initial begin
    repeat (3) @(posedge wclk);
    rst_n = 1;
    repeat (6) begin
      fast_reader = 0;
      repeat (400) @(posedge rclk);
      fast_reader = 1;
      repeat (400) @(posedge rclk);
    end
    wait (n_wr == 3000);
    fast_reader = 1;
    repeat (200) @(posedge rclk);
    check(n_rd == n_wr && sb.size() == 0, "all words read");
    check(n_full > 0 && n_empty > 0, "full and empty seen");
    check(max_level == (1 << AW), "full at depth eight");
    $display("written %0d, read %0d, full cycles %0d, empty cycles %0d",
             n_wr, n_rd, n_full, n_empty);
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
