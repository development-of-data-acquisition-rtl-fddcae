// centroid_engine: the photon-counting (centroiding) pipeline.
//
// Pixels arrive in read-out order. The line buffer keeps the last five rows,
// the window array forms the 5x5 neighbourhood of each new pixel, and the
// event detector and centroid calculator examine that neighbourhood in
// parallel. Every accepted event leaves as one raw centroid record: frame ID,
// event ID (counted from 0 in every frame), integer centre, sub-pixel
// numerators and denominator, central intensity, max-min corner difference and
// the multiple-event flag. Hot pixels and dropped multiple events are counted.
//
// Timing: a record leaves 4 cycles after the pixel that completes its window
// (line buffer, window, detector/calculator, record register). The engine
// never stalls: it takes one pixel per cycle at most and has no ready input;
// the buffer behind it must absorb or drop records.
module centroid_engine
  import pc_pkg::*;
#(
  parameter int unsigned WIDTH = IMG_W,
  parameter int unsigned SPAN  = WIN
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pix_valid,
  input  pix_t               pix,
  input  logic [X_W-1:0]     x,
  input  logic [Y_W-1:0]     y,
  input  logic [FRAME_W-1:0] frame_id,
  input  logic               sof,
  input  pix_t               thr_floor,
  input  pix_t               multi_thr,
  input  logic               reject_multi,
  output logic               rec_valid,
  output centroid_rec_t      rec,
  output logic               hot_seen,     // pulse: hot pixel rejected
  output logic               multi_seen,   // pulse: multiple event flagged
  output logic               multi_dropped // pulse: multiple event dropped
);

  logic               col_valid;
  pix_t [ROWS-1:0]    col;
  logic [X_W-1:0]     col_x, cx;
  logic [Y_W-1:0]     col_y, cy;
  logic               win_valid;
  window_t            w;

  logic    det_valid, is_event, is_hot, is_multi, multi_drop;
  pix_t    thr, corner_diff;

  logic                    cc_valid;
  logic [X_W-1:0]          x_int;
  logic [Y_W-1:0]          y_int;
  logic signed [NUM_W-1:0] x_num, y_num;
  logic [DEN_W-1:0]        den;
  pix_t                    intensity;

  logic [EVENT_W-1:0] event_cnt;

  line_buffer #(.WIDTH(WIDTH)) u_lb (
    .clk, .rst_n, .pix_valid, .pix, .x, .y,
    .col_valid, .col, .col_x, .col_y
  );

  pixel_window u_win (
    .clk, .rst_n, .col_valid, .col, .col_x, .col_y,
    .win_valid, .w, .cx, .cy
  );

  event_detector u_det (
    .clk, .rst_n, .win_valid, .w, .thr_floor, .multi_thr, .reject_multi,
    .det_valid, .is_event, .is_hot, .is_multi, .multi_drop, .thr, .corner_diff
  );

  centroid_calc #(.SPAN(SPAN)) u_cc (
    .clk, .rst_n, .win_valid, .w, .cx, .cy,
    .out_valid(cc_valid), .x_int, .y_int, .x_num, .y_num, .den, .intensity
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rec_valid     <= 1'b0;
      rec           <= '0;
      event_cnt     <= '0;
      hot_seen      <= 1'b0;
      multi_seen    <= 1'b0;
      multi_dropped <= 1'b0;
    end else begin
      rec_valid     <= 1'b0;
      hot_seen      <= det_valid && is_hot;
      multi_seen    <= det_valid && is_multi;
      multi_dropped <= det_valid && multi_drop;
      if (sof) begin
        event_cnt <= '0;
      end else if (det_valid && cc_valid && is_event) begin
        rec_valid        <= 1'b1;
        rec.pad          <= 1'b0;
        rec.frame_id     <= frame_id;
        rec.event_id     <= event_cnt;
        rec.x_int        <= x_int;
        rec.y_int        <= y_int;
        rec.x_num        <= x_num;
        rec.y_num        <= y_num;
        rec.den          <= den;
        rec.intensity    <= intensity;
        rec.corner_diff  <= corner_diff;
        rec.multi        <= is_multi;
        event_cnt        <= event_cnt + 1'b1;
      end
    end
  end

endmodule
