// centroid_calc: centroid of the window around an event, left undivided.
//
// The integer part of the centroid is the coordinate of the central pixel.
// The sub-pixel parts are kept as numerator and denominator, because the
// division is done later, in the telemetry unit. Following the worked 3x3
// example of the algorithm, the X numerator is the intensity of the rows above
// the centre minus that of the rows below it, the Y numerator the intensity of
// the columns left of the centre minus that of the columns right of it, and
// the denominator is the sum of the window. For the 5x5 window the outer rows
// and columns are weighted 2 (first moment); with SPAN = 3 only the inner 3x3
// is used, which reproduces the worked example exactly (-12/289, 6/289). The
// 2-weighting of the outer ring is this design's choice. A negative numerator
// becomes the packet's flag bit later on.
//
// Timing: one cycle from win_valid to out_valid.
module centroid_calc
  import pc_pkg::*;
#(
  parameter int unsigned SPAN = WIN   // 5: whole window, 3: inner 3x3
)(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    win_valid,
  input  window_t                 w,
  input  logic [X_W-1:0]          cx,
  input  logic [Y_W-1:0]          cy,
  output logic                    out_valid,
  output logic [X_W-1:0]          x_int,
  output logic [Y_W-1:0]          y_int,
  output logic signed [NUM_W-1:0] x_num,
  output logic signed [NUM_W-1:0] y_num,
  output logic [DEN_W-1:0]        den,
  output pix_t                    intensity
);

  localparam int C  = WIN / 2;
  localparam int HS = SPAN / 2;

  logic signed [NUM_W-1:0] xs, ys;
  logic [DEN_W-1:0]        ds;

  always_comb begin
    xs = '0;
    ys = '0;
    ds = '0;
    for (int r = 0; r < WIN; r++) begin
      for (int c = 0; c < WIN; c++) begin
        if (r >= C - HS && r <= C + HS && c >= C - HS && c <= C + HS) begin
          ds = ds + DEN_W'(w[r][c]);
          xs = xs + NUM_W'(C - r) * $signed({1'b0, w[r][c]});
          ys = ys + NUM_W'(C - c) * $signed({1'b0, w[r][c]});
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x_int     <= '0;
      y_int     <= '0;
      x_num     <= '0;
      y_num     <= '0;
      den       <= '0;
      intensity <= '0;
    end else begin
      out_valid <= win_valid;
      if (win_valid) begin
        x_int     <= cx;
        y_int     <= cy;
        x_num     <= xs;
        y_num     <= ys;
        den       <= ds;
        intensity <= w[C][C];
      end
    end
  end

endmodule
