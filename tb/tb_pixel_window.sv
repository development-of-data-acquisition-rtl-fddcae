// tb_pixel_window: feeds random 5-pixel columns with their coordinates into
// the window array and checks, for every column, that the window equals the
// last five columns received, that the centre coordinate is (x-2, y-2) and
// that a window is flagged valid only when it lies inside the frame.
module tb_pixel_window;
  import pc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic col_valid = 0;
  pix_t [ROWS-1:0] col = '0;
  logic [X_W-1:0] col_x = '0;
  logic [Y_W-1:0] col_y = '0;
  logic win_valid;
  window_t w;
  logic [X_W-1:0] cx;
  logic [Y_W-1:0] cy;
  int checks = 0, failures = 0;

  pix_t hist [$];   // all pixels received, column by column, top row first
  always #5 clk = ~clk;

  pixel_window dut (.*);

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
    for (int yy = 0; yy < 7; yy++) begin
      for (int xx = 0; xx < 12; xx++) begin
        @(negedge clk);
        col_valid = 1;
        col_x = X_W'(xx);
        col_y = Y_W'(yy);
        for (int r = 0; r < ROWS; r++) begin
          col[r] = pix_t'($urandom);
          hist.push_back(col[r]);
        end
        @(negedge clk);
        col_valid = 0;
        check(win_valid == (xx >= 4 && yy >= 4), "valid");
        check(cx == X_W'(xx - 2) && cy == Y_W'(yy - 2), "centre");
        if (xx >= 4) begin
          for (int c = 0; c < WIN; c++)
            for (int r = 0; r < WIN; r++)
              check(w[r][c] == hist[hist.size() - 5 * (WIN - c) + r], "pixel");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
