// tb_frame_transfer: frame transfer mode on 16 x 12 frames from the sensor
// model, through the capture block, into a model SDRAM and out to a randomly
// stalling SD-card byte sink. Every copied frame must arrive complete and in
// order as 16-bit words {frame[3:0], row[3:0], pixel} (high byte first);
// frames that start during a copy must be reported as skipped, never half
// stored; with the SDRAM slowed down, lost pixels must be reported.
module tb_frame_transfer;
  import pc_pkg::*;

  localparam int W = 16, H = 12;

  logic clk = 0, rst_n = 0, run = 0, enable = 1;
  logic cam_pclk, cam_fval, cam_lval;
  pix_t cam_data, value;
  int   req_x, req_y, frames;
  logic pix_valid, sof, eof;
  pix_t pix;
  logic [X_W-1:0] x;
  logic [Y_W-1:0] y;
  logic [FRAME_W-1:0] frame_id;
  sdram_req_t sd_req;
  sdram_rsp_t sd_rsp;
  logic sd_valid, sd_ready = 0;
  logic [7:0] sd_data;
  logic overflow, frame_skipped, frame_done;
  logic [7:0] bytes [$];
  int checks = 0, failures = 0;
  int n_done = 0, n_skip = 0, n_over = 0, n_sof = 0;
  int stored_frames [$];   // frame IDs expected on the SD card

  always #5 clk = ~clk;

  function automatic pix_t pattern(int px, int py, int f);
    return pix_t'(px * 5 + py * 17 + f * 3 + 2);
  endfunction
  assign value = pattern(req_x, req_y, frames);

  cmos_model #(.W(W), .H(H), .HBLANK(2), .VBLANK(4), .PCLK_HALF(20)) sensor (.*);
  cmos_capture cap (.*);
  frame_transfer dut (.*);
  sdram_model #(.AW(12), .LAT(1), .JITTER(1)) sdram (.clk, .req(sd_req), .rsp(sd_rsp));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // a frame is accepted when it starts while no frame is being stored or
  // copied; busy ends with frame_done
  bit busy = 0;
  int exp_skip = 0;
  always @(posedge clk) if (rst_n) begin
    if (sd_valid && sd_ready) bytes.push_back(sd_data);
    if (frame_done) begin n_done++; busy = 0; end
    if (frame_skipped) n_skip++;
    if (overflow) n_over++;
    if (sof) begin
      n_sof++;
      if (!busy) begin
        stored_frames.push_back(int'(frame_id));
        busy = 1;
      end else exp_skip++;
    end
    sd_ready <= ($urandom % 4) != 0;
  end

  task automatic check_frames(input int n, input bit exact);
    int f;
    logic [15:0] wd;
    for (int k = 0; k < n; k++) begin
      f = stored_frames.pop_front();
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          if (bytes.size() < 2) begin check(0, "bytes missing"); return; end
          wd = {bytes.pop_front(), bytes.pop_front()};
          check(wd[15:12] == 4'(f) && wd[11:8] == 4'(r), "word tag");
          if (exact) check(wd[7:0] == pattern(c, r, f - 1), "pixel value");
        end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run = 1;
    wait (frames == 4);
    run = 0;
    wait (!busy);
    repeat (50) @(posedge clk);
    check(n_sof == 4, "four frames seen");
    check(n_done == 4 - n_skip && n_skip > 0 && n_skip == exp_skip, "frames stored and skipped");
    check(n_over == 0, "no lost pixel at normal speed");
    check(bytes.size() == 2 * W * H * n_done, "byte count");
    check_frames(n_done, 1);
    check(bytes.size() == 0, "no extra bytes");

    // slow SDRAM: pixels are lost and reported
    sdram.extra_lat = 12;
    run = 1;
    wait (frames == 5);
    run = 0;
    wait (!busy);
    repeat (50) @(posedge clk);
    check(n_over > 0, "lost pixels reported");
    check(bytes.size() == 2 * (W * H - n_over), "short frame copied");
    $display("frames done %0d, skipped %0d, pixels lost %0d", n_done, n_skip, n_over);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
