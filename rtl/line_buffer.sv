// line_buffer: on-chip store of the most recent five rows of the frame.
//
// Only the last ROWS rows of the frame are kept (ROWS x IMG_W pixels), as in
// the centroiding scheme this readout follows: each new pixel overwrites the
// oldest row's value in its column, so the store always holds the rows
// y-4 .. y. The store is one memory of IMG_W words, each word holding the
// four older rows of one column; the fifth (newest) row is the incoming pixel
// itself. Reading a column and writing it back shifted happens in the same
// cycle. Packing the four rows into one word is this design's choice.
//
// Timing: one cycle. col_valid follows pix_valid by one cycle with
// col[0] = row y-4 (oldest, top) ... col[4] = row y (the new pixel), and the
// pixel's x, y. Rows never written in the current frame hold stale data; the
// window logic downstream ignores windows whose rows start before row 0.
module line_buffer
  import pc_pkg::*;
#(
  parameter int unsigned WIDTH = IMG_W
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pix_valid,
  input  pix_t               pix,
  input  logic [X_W-1:0]     x,
  input  logic [Y_W-1:0]     y,
  output logic               col_valid,
  output pix_t [ROWS-1:0]    col,
  output logic [X_W-1:0]     col_x,
  output logic [Y_W-1:0]     col_y
);

  localparam int unsigned AW = (WIDTH > 1) ? $clog2(WIDTH) : 1;

  // mem[x] = {row y-4, row y-3, row y-2, row y-1} of column x
  pix_t [ROWS-2:0] mem [WIDTH];
  logic [AW-1:0]   a;

  assign a = x[AW-1:0];

  always_ff @(posedge clk) begin
    if (pix_valid && x < X_W'(WIDTH)) begin
      mem[a] <= {mem[a][ROWS-3:0], pix};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_valid <= 1'b0;
      col       <= '0;
      col_x     <= '0;
      col_y     <= '0;
    end else begin
      col_valid <= pix_valid && x < X_W'(WIDTH);
      if (pix_valid) begin
        for (int r = 0; r < ROWS - 1; r++) col[r] <= mem[a][ROWS-2-r];
        col[ROWS-1] <= pix;
        col_x       <= x;
        col_y       <= y;
      end
    end
  end

endmodule
