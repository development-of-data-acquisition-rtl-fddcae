// pixel_window: the 5x5 window array around the newest pixel.
//
// Each 5-pixel column from the line buffer is shifted into a 5x5 register
// array, so the window holds the last read-out pixel and the 24 pixels read
// before it around it (the five rows y-4..y, the five columns x-4..x). The
// window's centre is then pixel (x-2, y-2). A window is valid only when it
// lies wholly inside the frame (x >= 4 and y >= 4): events whose window would
// cross the frame edge are not reported, which matches the detector's known
// loss of events at the image edges.
//
// Timing: one cycle. win_valid follows col_valid by one cycle; w[r][c] has
// r = 0 the top (oldest) row and c = 0 the left (oldest) column; cx, cy are
// the centre's coordinates.
module pixel_window
  import pc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               col_valid,
  input  pix_t [ROWS-1:0]    col,
  input  logic [X_W-1:0]     col_x,
  input  logic [Y_W-1:0]     col_y,
  output logic               win_valid,
  output window_t            w,
  output logic [X_W-1:0]     cx,
  output logic [Y_W-1:0]     cy
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_valid <= 1'b0;
      w         <= '0;
      cx        <= '0;
      cy        <= '0;
    end else begin
      win_valid <= col_valid && col_x >= X_W'(WIN - 1) && col_y >= Y_W'(WIN - 1);
      if (col_valid) begin
        for (int r = 0; r < WIN; r++) begin
          for (int c = 0; c < WIN - 1; c++) w[r][c] <= w[r][c+1];
          w[r][WIN-1] <= col[r];
        end
        cx <= col_x - X_W'(WIN / 2);
        cy <= col_y - Y_W'(WIN / 2);
      end
    end
  end

endmodule
