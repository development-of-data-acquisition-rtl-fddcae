// tb_line_buffer: streams the worked example frame (four zero rows, then
// its 22 rows of 22 columns) through the five-row line buffer and
// checks every output column against the image itself: the column for pixel
// (x, y) must be rows y-4 .. y of column x. This covers the snapshots after 1,
// 3, 6 and 9 rows of the example. Pixels arrive with occasional idle cycles.
module tb_line_buffer;
  import pc_pkg::*;
  `include "fig_image.svh"

  localparam int PRE = 4;   // zero rows first, as the array starts at zero

  logic clk = 0, rst_n = 0;
  logic pix_valid = 0;
  pix_t pix = '0;
  logic [X_W-1:0] x = '0;
  logic [Y_W-1:0] y = '0;
  logic col_valid;
  pix_t [ROWS-1:0] col;
  logic [X_W-1:0] col_x;
  logic [Y_W-1:0] col_y;
  int checks = 0, failures = 0, seen = 0;

  always #5 clk = ~clk;

  line_buffer #(.WIDTH(FIG_W)) dut (.*);

  function automatic int img(int r, int c);
    int fr;
    fr = r - PRE;
    if (fr < 0 || fr >= FIG_H) return 0;
    return fig_img[fr][c];
  endfunction

  always @(posedge clk) begin
    if (col_valid) begin
      seen++;
      for (int r = 0; r < ROWS; r++) begin
        // rows before the first row of the frame hold no defined data
        if (int'(col_y) - int'(ROWS) + 1 + r < 0) continue;
        checks++;
        if (int'(col[r]) != img(int'(col_y) - (ROWS - 1) + r, int'(col_x))) begin
          failures++;
          if (failures < 10)
            $display("mismatch y=%0d x=%0d r=%0d got %0d exp %0d", col_y, col_x, r,
                     col[r], img(int'(col_y) - (ROWS - 1) + r, int'(col_x)));
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < PRE + FIG_H; r++) begin
      for (int c = 0; c < FIG_W; c++) begin
        @(negedge clk);
        pix_valid = 1; pix = pix_t'(img(r, c)); x = X_W'(c); y = Y_W'(r);
        if (c % 3 == 2) begin
          @(negedge clk);
          pix_valid = 0;
        end
      end
      @(negedge clk);
      pix_valid = 0;
    end
    repeat (4) @(posedge clk);
    checks++;
    if (seen != (PRE + FIG_H) * FIG_W) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
