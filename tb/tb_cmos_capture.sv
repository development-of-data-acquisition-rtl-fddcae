// tb_cmos_capture: drives three frames of 16 x 12 pixels from the sensor
// model (pixel clock 4x slower than the system clock) and checks that every
// pixel is captured once, with its value, column and row, that frame start
// and end are signalled once per frame and that the frame number steps.
module tb_cmos_capture;
  import pc_pkg::*;

  localparam int W = 16, H = 12;

  logic clk = 0, rst_n = 0, run = 0;
  logic cam_pclk, cam_fval, cam_lval;
  pix_t cam_data;
  int   req_x, req_y, frames;
  pix_t value;
  logic pix_valid, sof, eof;
  pix_t pix;
  logic [X_W-1:0] x;
  logic [Y_W-1:0] y;
  logic [FRAME_W-1:0] frame_id;
  int checks = 0, failures = 0;
  int n_pix = 0, n_sof = 0, n_eof = 0, ex = 0, ey = 0;
  logic [FRAME_W-1:0] last_frame;

  always #5 clk = ~clk;

  function automatic pix_t pattern(int px, int py, int f);
    return pix_t'(px * 7 + py * 13 + f * 29 + 1);
  endfunction
  assign value = pattern(req_x, req_y, frames);

  cmos_model #(.W(W), .H(H), .PCLK_HALF(20)) sensor (.*);
  cmos_capture dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (sof) begin
      n_sof++;
      ex = 0; ey = 0;
      if (n_sof > 1) check(frame_id == last_frame + 1'b1, "frame number steps");
      last_frame = frame_id;
    end
    if (eof) begin
      n_eof++;
      check(ex == 0 && ey == H, "whole frame before end");
    end
    if (pix_valid) begin
      n_pix++;
      check(int'(x) == ex && int'(y) == ey, "coordinates");
      check(pix == pattern(ex, ey, frames), "pixel value");
      ex++;
      if (ex == W) begin ex = 0; ey++; end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run = 1;
    wait (frames == 3);
    run = 0;
    repeat (20) @(posedge clk);
    check(n_pix == 3 * W * H, "pixel count");
    check(n_sof == 3 && n_eof == 3, "frame markers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
