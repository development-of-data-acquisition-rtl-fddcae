// tb_detector_full: the whole readout at its default size, with no parameter
// changed: 1280-pixel rows through the five-row line buffer, 5x5 centroiding,
// 4-bit fractions, 460.8 kbaud RS232 at a 40 MHz clock and the full SDRAM
// ring. The model sensor sends full 1280 x 800 frames, at a 24 MHz pixel
// clock in photon counting and at 10 MHz in frame transfer, where the model
// SDRAM (one word per request) could not keep up with 24 MHz.
//   1. Photon counting: one frame with a sprinkling of photon splashes, hot
//      pixels and a double event on a noisy background. Every packet the
//      reference finder predicts must arrive over RS232, byte for byte and in
//      order, each taking 70 bit times.
//   2. Frame transfer: the next frame is stored in SDRAM and copied to the SD
//      card; all 1,024,000 tagged words are checked.
module tb_detector_full;
  import pc_pkg::*;
  `include "pc_ref.svh"

  localparam int W = 1280, H = 800;
  localparam int CPB = 87;           // the top's default bit time

  typedef int img_t [][];

  logic clk = 0, rst_n = 0, run = 0, fast = 1;
  logic cam_pclk, cam_fval, cam_lval;
  pix_t cam_data;
  int   frames;
  // two sensor models, 24 MHz and 10 MHz pixel clock; fast selects one
  logic f_pclk, f_fval, f_lval, s_pclk, s_fval, s_lval;
  pix_t f_data, s_data, f_value, s_value;
  int   f_x, f_y, f_frames, s_x, s_y, s_frames;
  mode_e mode = MODE_PHOTON;
  pix_t thr_floor = 8'd6, multi_thr = 8'd40;
  logic reject_multi = 0, log_to_sd = 0;
  sdram_req_t sdram_req;
  sdram_rsp_t sdram_rsp;
  logic sd_valid, sd_ready = 1;
  logic [7:0] sd_data;
  logic uart_txd;
  logic st_event, st_hot, st_multi, st_multi_drop, st_pkt_overflow, st_pkt_sent,
        st_pix_overflow, st_frame_skip, st_frame_done;

  img_t imgs [$];
  logic [63:0] exp_pkts [$];
  int checks = 0, failures = 0;
  int n_event = 0, n_hot = 0, n_multi = 0, n_sent = 0, n_povf = 0, n_xovf = 0,
      n_fdone = 0, n_sd = 0, n_bad_word = 0;
  int fval_starts = 0, exp_hot = 0;

  always #12.5 clk = ~clk;           // 40 MHz

  function automatic pix_t img_at(int f, int px, int py);
    if (f >= imgs.size()) return '0;
    return pix_t'(imgs[f][py][px]);
  endfunction
  assign f_value  = img_at(frames, f_x, f_y);
  assign s_value  = img_at(frames, s_x, s_y);
  assign frames   = f_frames + s_frames;
  assign cam_pclk = fast ? f_pclk : s_pclk;
  assign cam_fval = fast ? f_fval : s_fval;
  assign cam_lval = fast ? f_lval : s_lval;
  assign cam_data = fast ? f_data : s_data;

  cmos_model #(.W(W), .H(H), .HBLANK(16), .VBLANK(16), .PCLK_HALF(21)) sensor_fast (
    .run(run && fast), .cam_pclk(f_pclk), .cam_fval(f_fval), .cam_lval(f_lval),
    .cam_data(f_data), .req_x(f_x), .req_y(f_y), .value(f_value), .frames(f_frames));
  cmos_model #(.W(W), .H(H), .HBLANK(16), .VBLANK(16), .PCLK_HALF(50)) sensor_slow (
    .run(run && !fast), .cam_pclk(s_pclk), .cam_fval(s_fval), .cam_lval(s_lval),
    .cam_data(s_data), .req_x(s_x), .req_y(s_y), .value(s_value), .frames(s_frames));
  sdram_model #(.AW(21), .LAT(1), .JITTER(0)) sdram (.clk, .req(sdram_req), .rsp(sdram_rsp));
  uart_rx_model #(.CLKS_PER_BIT(CPB)) host (.clk, .rxd(uart_txd));

  detector_top dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always @(posedge cam_fval) begin
    fval_starts++;
    if (mode == MODE_PHOTON && frames < imgs.size()) begin
      ref_ev_t evs [$];
      int rmd;
      ref_find(imgs[frames], W, H, int'(thr_floor), int'(multi_thr), reject_multi, evs, exp_hot, rmd);
      foreach (evs[i]) exp_pkts.push_back(ref_packet(evs[i], fval_starts, i, 4));
    end
  end

  // frame words arrive high byte first: {frame[3:0], row[3:0], pixel}
  logic [7:0] hi_byte;
  bit         have_hi = 0;
  int         word_idx = 0, frame_tag = 0;
  always @(posedge clk) if (rst_n) begin
    n_event += st_event; n_hot += st_hot; n_multi += st_multi;
    n_sent += st_pkt_sent; n_povf += st_pkt_overflow; n_xovf += st_pix_overflow;
    n_fdone += st_frame_done;
    if (sd_valid && sd_ready) begin
      n_sd++;
      if (!have_hi) begin
        hi_byte = sd_data;
        have_hi = 1;
      end else begin
        int r, c;
        have_hi = 0;
        r = word_idx / W; c = word_idx % W;
        if (r < H && ({hi_byte, sd_data} != {4'(frame_tag), 4'(r), img_at(1, c, r)}))
          n_bad_word++;
        word_idx++;
      end
    end
  end

  // background noise 0..4, photon splashes, lone hot pixels, one double event
  function automatic img_t make_img(int events);
    img_t im;
    im = new[H];
    foreach (im[r]) begin
      im[r] = new[W];
      foreach (im[r][c]) im[r][c] = $urandom % 5;
    end
    for (int e = 0; e < events; e++) begin
      int ex, ey, a;
      ex = 10 + $urandom % (W - 20); ey = 10 + $urandom % (H - 20); a = 60 + $urandom % 160;
      for (int dy = -3; dy <= 3; dy++)
        for (int dx = -3; dx <= 3; dx++) begin
          int v;
          v = im[ey+dy][ex+dx] + a / (1 + dx * dx + dy * dy);
          im[ey+dy][ex+dx] = (v > 255) ? 255 : v;
        end
    end
    for (int s = 0; s < 4; s++) im[20 + $urandom % (H - 40)][20 + $urandom % (W - 40)] = 200;
    // two splashes two pixels apart diagonally: one corner of the stronger
    // one's window sits on the weaker one's peak
    for (int dy = -3; dy <= 5; dy++)
      for (int dx = -3; dx <= 5; dx++) begin
        int v;
        v = im[400+dy][600+dx] + 200 / (1 + dx * dx + dy * dy)
          + 120 / (1 + (dx - 2) * (dx - 2) + (dy - 2) * (dy - 2));
        im[400+dy][600+dx] = (v > 255) ? 255 : v;
      end
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
    int n_pkts, n_exp;
        repeat (4) @(posedge clk);
    rst_n = 1;

    // 1. photon counting over RS232
    imgs.push_back(make_img(24));
    send_frames(1);
    n_exp = exp_pkts.size();
    $display("frame 1: %0d events expected, %0d hot pixels", n_exp, exp_hot);
    wait (host.bytes.size() == 7 * n_exp);
    repeat (2 * 10 * CPB) @(posedge clk);
    check(host.bytes.size() == 7 * n_exp, "no extra bytes");
    check(n_event == n_exp && n_sent == n_exp && n_povf == 0, "all records sent");
    check(n_hot == exp_hot && exp_hot > 0, "hot pixels");
    check(n_multi > 0, "double event flagged");
    check(host.frame_errors == 0, "RS232 framing");
    // each packet's seven bytes leave back to back, 10 bit times apart
    for (int i = 0; i < n_exp; i++)
      check(host.start_cycle[7 * i + 6] - host.start_cycle[7 * i] == 64'(6 * 10 * CPB),
            "packet takes 70 bit times");
    n_pkts = 0;
    while (host.bytes.size() >= 7) begin
      logic [63:0] p;
      p = '0;
      for (int i = 0; i < 7; i++) p = (p << 8) | 64'(host.bytes.pop_front());
      check(exp_pkts.size() > 0 && p == exp_pkts.pop_front(), "packet matches reference");
      n_pkts++;
    end
    $display("RS232: %0d packets", n_pkts);

    // 2. frame transfer of the next frame
    fast = 0;
    mode = MODE_FRAME;
    imgs.push_back(make_img(24));
    frame_tag = fval_starts + 1;
    send_frames(1);
    wait (n_fdone == 1);
    repeat (100) @(posedge clk);
    check(n_xovf == 0, "no pixel lost");
    $display("pixels lost %0d", n_xovf);
    check(n_sd == 2 * W * H && word_idx == W * H, "whole frame on SD card");
    check(n_bad_word == 0, "frame words");
    $display("frame transfer: %0d words, %0d wrong", word_idx, n_bad_word);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #600ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
