// Reference photon-event finder for testbenches, written directly from the
// algorithm rather than from the RTL's structure: for every pixel whose 5x5
// neighbourhood lies inside the frame, threshold = max(lowest corner, floor);
// an event is a centre above the threshold that is the neighbourhood maximum
// (ties go to the pixel read first) with at least one other pixel above the
// threshold; otherwise such a centre is a hot pixel. Centroid numerators are
// the first moments (rows above minus rows below, columns left minus columns
// right, outer ring weighted 2) and the denominator the window sum. Events
// come out in the order the window completes, i.e. raster order of centres.
typedef struct {
  int x, y, xn, yn, den, inten, cd;
  bit multi;
} ref_ev_t;

function automatic void ref_find(input int img [][], input int w, input int h,
                                 input int floor_thr, input int multi_thr,
                                 input bit reject, ref ref_ev_t evs [$],
                                 output int n_hot, output int n_multi_drop);
  n_hot = 0;
  n_multi_drop = 0;
  evs.delete();
  for (int cy = 2; cy < h - 2; cy++)
    for (int cx = 2; cx < w - 2; cx++) begin
      int k[4], mn, mx, t, cen, above;
      bit lmax, multi;
      ref_ev_t e;
      k = '{img[cy-2][cx-2], img[cy-2][cx+2], img[cy+2][cx-2], img[cy+2][cx+2]};
      mn = k[0]; mx = k[0];
      foreach (k[i]) begin
        if (k[i] < mn) mn = k[i];
        if (k[i] > mx) mx = k[i];
      end
      t = (mn > floor_thr) ? mn : floor_thr;
      cen = img[cy][cx];
      if (cen <= t) continue;
      lmax = 1; above = 0;
      for (int dy = -2; dy <= 2; dy++)
        for (int dx = -2; dx <= 2; dx++) begin
          int v;
          if (dy == 0 && dx == 0) continue;
          v = img[cy+dy][cx+dx];
          if ((dy < 0 || (dy == 0 && dx < 0)) ? v >= cen : v > cen) lmax = 0;
          if (v > t) above++;
        end
      if (!lmax) continue;
      if (above == 0) begin n_hot++; continue; end
      multi = (mx - mn) > multi_thr;
      if (multi && reject) begin n_multi_drop++; continue; end
      e.x = cx; e.y = cy; e.inten = cen; e.cd = mx - mn; e.multi = multi;
      e.xn = 0; e.yn = 0; e.den = 0;
      for (int dy = -2; dy <= 2; dy++)
        for (int dx = -2; dx <= 2; dx++) begin
          e.den += img[cy+dy][cx+dx];
          e.xn  += -dy * img[cy+dy][cx+dx];
          e.yn  += -dx * img[cy+dy][cx+dx];
        end
      evs.push_back(e);
    end
endfunction

// Event packet expected from the telemetry unit for a reference event:
// {multiple, frame ID, event ID, Xc int, Xc fraction, Xc flag, Yc int,
// Yc fraction, Yc flag, intensity}, F-bit fractions floor(|num| 2^F / den)
// saturating at all ones; returned right-aligned, (48 + 2F) bits long.
function automatic logic [63:0] ref_packet(input ref_ev_t e, input int frame,
                                           input int evid, input int f);
  logic [63:0] p;
  int xq, yq, xm, ym;
  xm = (e.xn < 0) ? -e.xn : e.xn;
  ym = (e.yn < 0) ? -e.yn : e.yn;
  xq = (e.den == 0) ? 0 : (xm >= e.den) ? (1 << f) - 1 : (xm << f) / e.den;
  yq = (e.den == 0) ? 0 : (ym >= e.den) ? (1 << f) - 1 : (ym << f) / e.den;
  p = 64'(e.multi);
  p = (p << 8)  | 64'(frame & 255);
  p = (p << 8)  | 64'(evid & 255);
  p = (p << 11) | 64'(e.x);
  p = (p << f)  | 64'(xq);
  p = (p << 1)  | 64'(e.xn < 0);
  p = (p << 10) | 64'(e.y);
  p = (p << f)  | 64'(yq);
  p = (p << 1)  | 64'(e.yn < 0);
  p = (p << 8)  | 64'(e.inten);
  return p;
endfunction
