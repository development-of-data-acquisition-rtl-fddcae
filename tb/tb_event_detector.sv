// tb_event_detector: checks the event decision on directed windows (the
// worked example's event, a lone hot pixel, a tie, a window that is not a
// maximum, a multiple event with and without rejection, the threshold floor)
// and on random windows against a reference decision written out here.
module tb_event_detector;
  import pc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic win_valid = 0;
  window_t w = '0;
  pix_t thr_floor = '0, multi_thr = 8'd40;
  logic reject_multi = 0;
  logic det_valid, is_event, is_hot, is_multi, multi_drop;
  pix_t thr, corner_diff;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  event_detector dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic apply(input window_t win);
    @(negedge clk);
    w = win; win_valid = 1;
    @(negedge clk);
    win_valid = 0;
  endtask

  // reference decision
  task automatic expect_of(input window_t win, output bit ev, output bit hot,
                           output bit mul, output int t, output int cd);
    int mn, mx, k[4], cen, above;
    bit lmax;
    k = '{win[0][0], win[0][4], win[4][0], win[4][4]};
    mn = k[0]; mx = k[0];
    foreach (k[i]) begin
      if (k[i] < mn) mn = k[i];
      if (k[i] > mx) mx = k[i];
    end
    t = (mn > thr_floor) ? mn : thr_floor;
    cd = mx - mn;
    cen = win[2][2];
    lmax = 1; above = 0;
    for (int i = 0; i < 25; i++) begin
      if (i == 12) continue;
      if (i < 12 && win[i / 5][i % 5] >= cen) lmax = 0;
      if (i > 12 && win[i / 5][i % 5] > cen) lmax = 0;
      if (win[i / 5][i % 5] > t) above++;
    end
    mul = (cen > t) && lmax && above > 0 && cd > multi_thr;
    hot = (cen > t) && lmax && above == 0;
    ev  = (cen > t) && lmax && above > 0 && !(mul && reject_multi);
  endtask

  localparam int fig5 [5][5] = '{
    '{16, 20, 22, 21, 17},
    '{22, 28, 31, 28, 22},
    '{27, 34, 37, 32, 24},
    '{27, 34, 35, 30, 23},
    '{23, 27, 28, 24, 18}};

  initial begin
    window_t win;
    bit ev, hot, mul;
    int t, cd;
    int n_ev = 0, n_hot = 0, n_mul = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // worked example: an event, threshold 16 (lowest corner), corners 16..23
    for (int r = 0; r < 5; r++) for (int c = 0; c < 5; c++) win[r][c] = pix_t'(fig5[r][c]);
    apply(win);
    check(det_valid && is_event && !is_hot && !is_multi, "example event");
    check(thr == 16 && corner_diff == 7, "example threshold/corners");

    // same window shifted so that 37 is not the centre: no event
    win[2][2] = 30; win[1][2] = 37;
    apply(win);
    check(!is_event && !is_hot, "not a local maximum");

    // lone hot pixel on a flat background
    win = '0; win[2][2] = 90;
    apply(win);
    check(!is_event && is_hot, "hot pixel");

    // tie with a pixel read later: event; with a pixel read earlier: none
    win = '0; win[2][2] = 50; win[2][3] = 50; win[1][2] = 20;
    apply(win);
    check(is_event, "tie with later pixel");
    win = '0; win[2][2] = 50; win[2][1] = 50; win[1][2] = 20;
    apply(win);
    check(!is_event, "tie with earlier pixel");

    // multiple event: one corner far above the others
    win = '0; win[2][2] = 200; win[2][3] = 100; win[4][4] = 120;
    apply(win);
    check(is_event && is_multi && corner_diff == 120, "multiple flagged");
    reject_multi = 1;
    apply(win);
    check(!is_event && is_multi && multi_drop, "multiple rejected");
    reject_multi = 0;

    // threshold floor above the corners
    thr_floor = 8'd60;
    win = '0; win[2][2] = 80; win[2][3] = 50;
    apply(win);
    check(thr == 60 && is_hot && !is_event, "floor makes it a hot pixel");
    thr_floor = 8'd0;

    for (int n = 0; n < 3000; n++) begin
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 5; c++) win[r][c] = pix_t'($urandom % 40);
      if (n % 2 == 0) win[2][2] = pix_t'(30 + $urandom % 60);
      if (n % 7 == 0) for (int r = 0; r < 5; r++) for (int c = 0; c < 5; c++)
        if (!(r == 2 && c == 2)) win[r][c] = pix_t'($urandom % 4);
      reject_multi = (n % 3 == 0);
      multi_thr    = pix_t'($urandom % 40);
      thr_floor    = pix_t'($urandom % 10);
      apply(win);
      expect_of(win, ev, hot, mul, t, cd);
      check(is_event == ev && is_hot == hot && is_multi == mul, "random flags");
      check(int'(thr) == t && int'(corner_diff) == cd, "random threshold");
      n_ev += ev; n_hot += hot; n_mul += mul;
    end
    check(n_ev > 50 && n_hot > 10 && n_mul > 10, "random coverage");
    $display("random: %0d events, %0d hot, %0d multiple", n_ev, n_hot, n_mul);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
