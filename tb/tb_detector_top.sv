// tb_detector_top: end-to-end test of the readout with a model sensor
// (22 x 22 frames), a model SDRAM, a model SD-card byte sink and a model
// RS232 receiver. Phases:
//   1. photon counting, worked example frame: exactly its four event packets
//      arrive over RS232, byte for byte as the reference predicts;
//   2. photon counting, a burst of busy random frames with a slow link: the
//      SDRAM ring fills, records are dropped, and every packet that does
//      arrive matches a reference packet, in order;
//   3. photon counting logged to the SD card instead of RS232;
//   4. frame transfer: frames arrive on the SD card tagged with frame and
//      row numbers, frames starting during a copy are skipped, and a slowed
//      SDRAM loses pixels.
// Each mechanism (events, hot pixels, multiple events flagged and dropped,
// record overflow, RS232 and SD output, frame copy, frame skip, pixel loss,
// mode switch) is counted and must occur at least once.
module tb_detector_top;
  import pc_pkg::*;
  `include "fig_image.svh"
  `include "pc_ref.svh"

  localparam int W = 22, H = 22;
  localparam int CPB = 32;
  localparam int CAP = 4;

  typedef int img_t [][];

  logic clk = 0, rst_n = 0, run = 0;
  logic cam_pclk, cam_fval, cam_lval;
  pix_t cam_data, value;
  int   req_x, req_y, frames;
  mode_e mode = MODE_PHOTON;
  pix_t thr_floor = '0, multi_thr = 8'd255;
  logic reject_multi = 0, log_to_sd = 0;
  sdram_req_t sdram_req;
  sdram_rsp_t sdram_rsp;
  logic sd_valid, sd_ready = 0;
  logic [7:0] sd_data;
  logic uart_txd;
  logic st_event, st_hot, st_multi, st_multi_drop, st_pkt_overflow, st_pkt_sent,
        st_pix_overflow, st_frame_skip, st_frame_done;

  img_t imgs [$];
  logic [63:0] exp_pkts [$];
  logic [7:0]  sd_bytes [$];
  int checks = 0, failures = 0;
  int n_event = 0, n_hot = 0, n_multi = 0, n_mdrop = 0, n_povf = 0, n_sent = 0,
      n_xovf = 0, n_fskip = 0, n_fdone = 0, n_mode = 0, n_uart_pkts = 0, n_sd_pkts = 0;
  int fval_starts = 0;

  always #5 clk = ~clk;

  function automatic pix_t img_at(int f, int px, int py);
    if (f >= imgs.size()) return '0;
    return pix_t'(imgs[f][py][px]);
  endfunction
  assign value = img_at(frames, req_x, req_y);

  cmos_model #(.W(W), .H(H), .HBLANK(4), .VBLANK(6), .PCLK_HALF(20)) sensor (.*);
  sdram_model #(.AW(14), .LAT(1), .JITTER(1)) sdram (.clk, .req(sdram_req), .rsp(sdram_rsp));
  uart_rx_model #(.CLKS_PER_BIT(CPB)) host (.clk, .rxd(uart_txd));

  detector_top #(.CLKS_PER_BIT(CPB), .CAP(CAP)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // at each frame start in photon mode, queue the packets the frame should give
  always @(posedge cam_fval) begin
    fval_starts++;
    if (mode == MODE_PHOTON && frames < imgs.size()) begin
      ref_ev_t evs [$];
      int rh, rmd;
      ref_find(imgs[frames], W, H, thr_floor, multi_thr, reject_multi, evs, rh, rmd);
      foreach (evs[i]) exp_pkts.push_back(ref_packet(evs[i], fval_starts, i, 4));
    end
  end

  always @(posedge clk) if (rst_n) begin
    n_event += st_event; n_hot += st_hot; n_multi += st_multi; n_mdrop += st_multi_drop;
    n_povf += st_pkt_overflow; n_sent += st_pkt_sent; n_xovf += st_pix_overflow;
    n_fskip += st_frame_skip; n_fdone += st_frame_done;
    if (sd_valid && sd_ready) sd_bytes.push_back(sd_data);
    sd_ready <= ($urandom % 4) != 0;
  end

  // match received packets, in order, against the expected ones; with
  // exact = 1 none may be missing
  task automatic match_packets(ref logic [7:0] q [$], input bit exact, output int n);
    logic [63:0] p;
    bit found;
    n = 0;
    while (q.size() >= 7) begin
      p = '0;
      for (int i = 0; i < 7; i++) p = (p << 8) | 64'(q.pop_front());
      n++;
      found = 0;
      while (exp_pkts.size() > 0) begin
        if (exp_pkts.pop_front() == p) begin found = 1; break; end
        check(!exact, "packet missing");
      end
      check(found, "packet matches reference");
    end
    check(q.size() == 0, "whole packets only");
  endtask

  function automatic img_t random_img(int events);
    img_t im;
    im = new[H];
    foreach (im[r]) begin
      im[r] = new[W];
      foreach (im[r][c]) im[r][c] = $urandom % 5;
    end
    for (int e = 0; e < events; e++) begin
      int ex, ey, a;
      ex = $urandom % W; ey = $urandom % H; a = 40 + $urandom % 180;
      for (int dy = -3; dy <= 3; dy++)
        for (int dx = -3; dx <= 3; dx++)
          if (ey + dy >= 0 && ey + dy < H && ex + dx >= 0 && ex + dx < W) begin
            int v;
            v = im[ey+dy][ex+dx] + a / (1 + dx * dx + dy * dy);
            im[ey+dy][ex+dx] = (v > 255) ? 255 : v;
          end
    end
    for (int s = 0; s < 3; s++) im[$urandom % H][$urandom % W] = 150 + $urandom % 100;
    return im;
  endfunction

  task automatic send_frames(input int n);
    int target;
    target = frames + n;
    run = 1;
    wait (frames == target);
    run = 0;
  endtask

  initial begin
    img_t im;
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. worked example frame over RS232
    im = new[H];
    foreach (im[r]) begin
      im[r] = new[W];
      foreach (im[r][c]) im[r][c] = fig_img[r][c];
    end
    imgs.push_back(im);
    send_frames(1);
    repeat (8 * 10 * CPB * 6) @(posedge clk);
    check(n_event == 4, "example: four events");
    match_packets(host.bytes, 1, n);
    check(n == 4 && exp_pkts.size() == 0, "example: four packets");
    check(host.frame_errors == 0, "RS232 framing");

    // 2. busy frames, slow link: overflow
    multi_thr = 8'd12;
    thr_floor = 8'd6;     // above the background noise (0..4)
    for (int f = 0; f < 6; f++) imgs.push_back(random_img(9));
    send_frames(3);
    reject_multi = 1;
    send_frames(3);
    reject_multi = 0;
    repeat (2 * CAP * 7 * 10 * CPB + 40 * 7 * 10 * CPB) @(posedge clk);
    match_packets(host.bytes, 0, n);
    n_uart_pkts = n + 4;
    check(n_uart_pkts == n_sent, "packets sent = packets received");
    check(n_sent + n_povf == n_event, "every record sent or dropped");
    exp_pkts.delete();

    // 3. log packets to the SD card
    log_to_sd = 1;
    imgs.push_back(random_img(3));
    send_frames(1);
    repeat (3000) @(posedge clk);
    match_packets(sd_bytes, 1, n_sd_pkts);
    check(n_sd_pkts > 0 && exp_pkts.size() == 0, "packets on SD card");
    check(host.bytes.size() == 0, "nothing on RS232 while logging");
    log_to_sd = 0;

    // 4. frame transfer
    mode = MODE_FRAME;
    n_mode++;
    sd_bytes.delete();
    for (int f = 0; f < 4; f++) imgs.push_back(random_img(2));
    begin
      int first_id, got_frames;
      logic [15:0] wd;
      first_id = fval_starts + 1;
      send_frames(4);
      repeat (6000) @(posedge clk);
      check(n_fskip > 0, "frames skipped");
      check(sd_bytes.size() == 2 * W * H * n_fdone, "frame bytes");
      got_frames = n_fdone;
      // the first frame is always stored: check it pixel by pixel
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          if (sd_bytes.size() < 2) break;
          wd = {sd_bytes.pop_front(), sd_bytes.pop_front()};
          check(wd[15:12] == 4'(first_id) && wd[11:8] == 4'(r), "frame word tag");
          check(wd[7:0] == pix_t'(imgs[imgs.size() - 4][r][c]), "frame pixel");
        end
      sdram.extra_lat = 12;
      sd_bytes.delete();
      imgs.push_back(random_img(2));
      send_frames(1);
      repeat (6000) @(posedge clk);
      check(n_xovf > 0, "pixels lost with slow SDRAM");
      check(n_fdone == got_frames + 1, "short frame copied");
      check(sd_bytes.size() == 2 * (W * H - n_xovf), "short frame bytes");
      sdram.extra_lat = 0;
    end
    mode = MODE_PHOTON;
    n_mode++;

    $display("events %0d, hot %0d, multiple %0d, dropped multiple %0d, record overflow %0d",
             n_event, n_hot, n_multi, n_mdrop, n_povf);
    $display("packets RS232 %0d, SD %0d; frames copied %0d, skipped %0d, pixels lost %0d, mode switches %0d",
             n_uart_pkts, n_sd_pkts, n_fdone, n_fskip, n_xovf, n_mode);
    check(n_event > 0,   "mechanism: event");
    check(n_hot > 0,     "mechanism: hot pixel");
    check(n_multi > 0,   "mechanism: multiple event flagged");
    check(n_mdrop > 0,   "mechanism: multiple event dropped");
    check(n_povf > 0,    "mechanism: record overflow");
    check(n_uart_pkts > 0, "mechanism: RS232 output");
    check(n_sd_pkts > 0, "mechanism: SD logging");
    check(n_fdone > 0,   "mechanism: frame copy");
    check(n_fskip > 0,   "mechanism: frame skip");
    check(n_xovf > 0,    "mechanism: pixel loss");
    check(n_mode == 2,   "mechanism: mode switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
