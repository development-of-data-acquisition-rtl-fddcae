// event_detector: decides whether a 5x5 window is centred on a photon event.
//
// The event threshold is estimated locally for every window as the lowest of
// the four corner pixels (the local background), raised to a programmable
// floor thr_floor (the mean noise level used in the hardware tests). The
// centre is an event candidate when it exceeds the threshold and is the local
// maximum of the window. Ties between equal pixels go to the one read out
// first: the centre must be strictly greater than the pixels read before it
// and at least equal to those read after it, so one event is never reported
// twice. A candidate where no pixel other than the centre exceeds the
// threshold is a hot pixel and is dropped. The difference between the largest
// and the smallest corner marks multiple (overlapping) events: it is reported
// with every event, and an event whose difference exceeds multi_thr is flagged
// and, when reject_multi is set, dropped. The floor, the tie rule and the
// optional rejection are this design's choices; the corner-based threshold,
// the hot-pixel rule and the max-min corner marker follow the algorithm the
// readout is built on.
//
// Timing: one cycle from win_valid to det_valid; outputs hold until the next
// window.
module event_detector
  import pc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    win_valid,
  input  window_t w,
  input  pix_t    thr_floor,     // lowest threshold allowed
  input  pix_t    multi_thr,     // max-min corner difference marking a multiple event
  input  logic    reject_multi,  // drop flagged multiple events
  output logic    det_valid,     // a window was examined
  output logic    is_event,      // accepted event
  output logic    is_hot,        // rejected hot pixel
  output logic    is_multi,      // multiple-event candidate (flag)
  output logic    multi_drop,    // multiple event dropped
  output pix_t    thr,           // threshold used
  output pix_t    corner_diff    // max - min corner
);

  localparam int unsigned C = WIN / 2;

  pix_t c_min, c_max, t_use, centre;
  logic local_max, above_any, cand, multi_c;

  always_comb begin
    pix_t k0, k1, k2, k3;
    k0 = w[0][0];
    k1 = w[0][WIN-1];
    k2 = w[WIN-1][0];
    k3 = w[WIN-1][WIN-1];
    c_min = k0;
    c_max = k0;
    if (k1 < c_min) c_min = k1;
    if (k2 < c_min) c_min = k2;
    if (k3 < c_min) c_min = k3;
    if (k1 > c_max) c_max = k1;
    if (k2 > c_max) c_max = k2;
    if (k3 > c_max) c_max = k3;
    t_use  = (c_min > thr_floor) ? c_min : thr_floor;
    centre = w[C][C];

    local_max = 1'b1;
    above_any = 1'b0;
    for (int r = 0; r < WIN; r++) begin
      for (int c = 0; c < WIN; c++) begin
        if (!(r == C && c == C)) begin
          if (r * WIN + c < C * WIN + C) begin
            if (!(centre > w[r][c])) local_max = 1'b0;   // read earlier
          end else begin
            if (!(centre >= w[r][c])) local_max = 1'b0;  // read later
          end
          if (w[r][c] > t_use) above_any = 1'b1;
        end
      end
    end
    cand    = (centre > t_use) && local_max;
    multi_c = (c_max - c_min) > multi_thr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      det_valid   <= 1'b0;
      is_event    <= 1'b0;
      is_hot      <= 1'b0;
      is_multi    <= 1'b0;
      multi_drop  <= 1'b0;
      thr         <= '0;
      corner_diff <= '0;
    end else begin
      det_valid  <= win_valid;
      is_event   <= win_valid && cand && above_any && !(multi_c && reject_multi);
      is_hot     <= win_valid && cand && !above_any;
      is_multi   <= win_valid && cand && above_any && multi_c;
      multi_drop <= win_valid && cand && above_any && multi_c && reject_multi;
      if (win_valid) begin
        thr         <= t_use;
        corner_diff <= c_max - c_min;
      end
    end
  end

endmodule
