// tb_centroid_engine: runs whole frames through the centroiding pipeline.
// Frame 1 is the worked example frame: exactly its four photon events must
// come out (peaks 37, 31, 33, 25 at the positions of the reconstructed
// example image), numbered 0..3. Further frames are random: a dark
// background with noise, Gaussian-like events, isolated hot pixels and
// overlapping pairs, checked record by record against the reference finder,
// with multiple-event rejection off and on and with a threshold floor.
module tb_centroid_engine;
  import pc_pkg::*;
  `include "fig_image.svh"
  `include "pc_ref.svh"

  localparam int W = 40;    // line buffer length; frames are at most W wide

  logic clk = 0, rst_n = 0;
  logic pix_valid = 0, sof = 0;
  pix_t pix = '0;
  logic [X_W-1:0] x = '0;
  logic [Y_W-1:0] y = '0;
  logic [FRAME_W-1:0] frame_id = '0;
  pix_t thr_floor = '0, multi_thr = 8'd255;
  logic reject_multi = 0;
  logic rec_valid, hot_seen, multi_seen, multi_dropped;
  centroid_rec_t rec;
  centroid_rec_t got [$];
  int checks = 0, failures = 0, n_hot = 0, n_mdrop = 0, n_multi = 0;
  int tot_ev = 0, tot_hot = 0, tot_mdrop = 0, tot_multi = 0;

  always #5 clk = ~clk;

  centroid_engine #(.WIDTH(W)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (rec_valid) got.push_back(rec);
    if (hot_seen) n_hot++;
    if (multi_dropped) n_mdrop++;
    if (multi_seen) n_multi++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic run_frame(input int img [][], input int w, input int h);
    ref_ev_t evs [$];
    int rh, rmd;
    got.delete(); n_hot = 0; n_mdrop = 0; n_multi = 0;
    @(negedge clk);
    sof = 1; frame_id = frame_id + 1'b1;
    @(negedge clk);
    sof = 0;
    for (int r = 0; r < h; r++) begin
      for (int c = 0; c < w; c++) begin
        @(negedge clk);
        pix_valid = 1; pix = pix_t'(img[r][c]); x = X_W'(c); y = Y_W'(r);
        if ($urandom % 4 == 0) begin @(negedge clk); pix_valid = 0; end
      end
      @(negedge clk);
      pix_valid = 0;
      repeat (3) @(negedge clk);
    end
    repeat (8) @(negedge clk);
    ref_find(img, w, h, thr_floor, multi_thr, reject_multi, evs, rh, rmd);
    check(got.size() == evs.size(), "event count");
    check(n_hot == rh && n_mdrop == rmd, "hot and dropped counts");
    tot_ev += evs.size(); tot_hot += rh; tot_mdrop += rmd; tot_multi += n_multi;
    foreach (evs[i]) begin
      if (i >= got.size()) break;
      check(got[i].frame_id == frame_id && got[i].event_id == EVENT_W'(i), "IDs");
      check(int'(got[i].x_int) == evs[i].x && int'(got[i].y_int) == evs[i].y, "position");
      check(int'(got[i].x_num) == evs[i].xn && int'(got[i].y_num) == evs[i].yn &&
            int'(got[i].den) == evs[i].den, "centroid sums");
      check(int'(got[i].intensity) == evs[i].inten && int'(got[i].corner_diff) == evs[i].cd &&
            got[i].multi == evs[i].multi, "intensity and corners");
    end
  endtask

  initial begin
    int img [][];
    repeat (3) @(posedge clk);
    rst_n = 1;

    // the worked example frame
    img = new[FIG_H];
    foreach (img[r]) begin
      img[r] = new[FIG_W];
      foreach (img[r][c]) img[r][c] = fig_img[r][c];
    end
    run_frame(img, FIG_W, FIG_H);
    check(got.size() == 4, "example: four events");
    if (got.size() == 4) begin
      check(got[0].x_int == 6  && got[0].y_int == 3  && got[0].intensity == 37, "example event 37");
      check(got[1].x_int == 16 && got[1].y_int == 6  && got[1].intensity == 31, "example event 31");
      check(got[2].x_int == 14 && got[2].y_int == 14 && got[2].intensity == 33, "example event 33");
      check(got[3].x_int == 5  && got[3].y_int == 17 && got[3].intensity == 25, "example event 25");
    end

    // random frames
    for (int f = 0; f < 12; f++) begin
      int w, h;
      w = 24 + $urandom % 17; h = 16 + $urandom % 10;
      img = new[h];
      foreach (img[r]) begin
        img[r] = new[w];
        foreach (img[r][c]) img[r][c] = $urandom % 6;
      end
      for (int e = 0; e < 6; e++) begin
        int ex, ey, a;
        ex = $urandom % w; ey = $urandom % h; a = 40 + $urandom % 180;
        for (int dy = -3; dy <= 3; dy++)
          for (int dx = -3; dx <= 3; dx++)
            if (ey + dy >= 0 && ey + dy < h && ex + dx >= 0 && ex + dx < w) begin
              int v;
              v = img[ey+dy][ex+dx] + a / (1 + dx * dx + dy * dy);
              img[ey+dy][ex+dx] = (v > 255) ? 255 : v;
            end
      end
      for (int s = 0; s < 5; s++) img[$urandom % h][$urandom % w] = 200 + $urandom % 56;
      multi_thr    = pix_t'(5 + $urandom % 30);
      reject_multi = f % 2;
      thr_floor    = (f % 3 == 2) ? pix_t'(8) : pix_t'(0);
      run_frame(img, w, h);
    end
    $display("events %0d, hot pixels %0d, multiple flagged %0d, dropped %0d",
             tot_ev, tot_hot, tot_multi, tot_mdrop);
    check(tot_hot > 0 && tot_mdrop > 0 && tot_multi > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
