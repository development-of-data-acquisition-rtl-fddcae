// cmos_model: behavioural stand-in for the CMOS sensor's video output (not
// synthesizable). It produces frames of W x H pixels: frame-valid high for
// the frame, line-valid high during each row's W pixels, and a free-running
// pixel clock with half-period PCLK_HALF ns. The pixel value is asked for
// through (req_x, req_y) and taken from the input value in the same instant,
// so the testbench decides the image. Data changes on the falling edge of
// the pixel clock and is stable at the rising edge. Frames are sent while
// run is high; frames counts the frames sent.
module cmos_model
  import pc_pkg::*;
#(
  parameter int W         = 16,
  parameter int H         = 12,
  parameter int HBLANK    = 4,     // pixel clocks between rows
  parameter int VBLANK    = 8,     // pixel clocks before and after a frame
  parameter int PCLK_HALF = 25
)(
  input  logic run,
  output logic cam_pclk,
  output logic cam_fval,
  output logic cam_lval,
  output pix_t cam_data,
  output int   req_x,
  output int   req_y,
  input  pix_t value,
  output int   frames
);

  initial begin
    cam_pclk = 0; cam_fval = 0; cam_lval = 0; cam_data = '0;
    req_x = 0; req_y = 0; frames = 0;
    forever begin
      if (!run) begin
        #(2 * PCLK_HALF);
        cam_pclk = ~cam_pclk;
        #(PCLK_HALF) cam_pclk = ~cam_pclk;
        continue;
      end
      repeat (VBLANK) begin
        #(PCLK_HALF) cam_pclk = 1;
        #(PCLK_HALF) cam_pclk = 0;
      end
      cam_fval = 1;
      for (int y = 0; y < H; y++) begin
        repeat (HBLANK) begin
          #(PCLK_HALF) cam_pclk = 1;
          #(PCLK_HALF) cam_pclk = 0;
        end
        for (int x = 0; x < W; x++) begin
          req_x = x; req_y = y;
          #0 cam_data = value;
          cam_lval = 1;
          #(PCLK_HALF) cam_pclk = 1;
          #(PCLK_HALF) cam_pclk = 0;
        end
        cam_lval = 0;
      end
      repeat (HBLANK) begin
        #(PCLK_HALF) cam_pclk = 1;
        #(PCLK_HALF) cam_pclk = 0;
      end
      cam_fval = 0;
      frames++;
      repeat (VBLANK) begin
        #(PCLK_HALF) cam_pclk = 1;
        #(PCLK_HALF) cam_pclk = 0;
      end
    end
  end

endmodule
