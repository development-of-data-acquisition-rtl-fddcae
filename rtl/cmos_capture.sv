// cmos_capture: receives the CMOS sensor's pixel stream.
//
// The sensor drives a pixel clock, a line-valid and a frame-valid signal and
// the pixel value. The front end runs on the sensor's own pixel clock: on
// each rising edge it samples frame-valid, line-valid and the data, counts
// columns within a line and lines within a frame, and notes where a frame
// starts (frame-valid rises) and ends (frame-valid falls). Each pixel, and
// each frame start or end, becomes one 32-bit entry {sof, eof, pixel flag,
// x, y, value} in an eight-entry async_fifo that carries it into the system
// clock. There the entries are read out one per clock: a frame start
// becomes the sof pulse and steps the frame number, a pixel becomes a
// pix_valid strobe with its coordinates, a frame end the eof pulse. When a
// frame start and the frame's first pixel share a pixel-clock edge, sof is
// sent one cycle ahead of the pixel.
//
// The sensor's outputs wired straight into the logic follow the
// description of the readout; the clock crossing, the active-high
// polarities and the frame numbering from 1 are this design's choices. The
// system clock must be faster than the pixel rate (40 MHz against the
// sensor's 6-27 MHz); nothing can stall the sensor, so a pixel that found
// the FIFO full would be lost, which cannot happen while that holds.
//
// Timing: pix_valid follows the pixel clock edge that presents the pixel by
// two pixel clocks' write-pointer sync plus two to three system clocks.
// sof comes before the frame's first pixel, eof after its last; x, y and
// frame_id accompany pix_valid. The assertion that no pixel is lost in the
// crossing is switched off by rst_n, which lint reports as a reset also
// used synchronously; it concerns the assertion only, not the circuit.
module cmos_capture
  import pc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cam_pclk,
  input  logic               cam_fval,
  input  logic               cam_lval,
  input  pix_t               cam_data,
  output logic               pix_valid,
  output pix_t               pix,
  output logic [X_W-1:0]     x,
  output logic [Y_W-1:0]     y,
  output logic [FRAME_W-1:0] frame_id,
  output logic               sof,
  output logic               eof
);
  typedef struct packed {
    logic           sof;
    logic           eof;
    logic           pv;
    logic [X_W-1:0] x;
    logic [Y_W-1:0] y;
    pix_t           value;
  } entry_t;

  localparam int unsigned EW = $bits(entry_t);

  // ---- pixel clock domain ----
  logic           prst_q0, prst_q1;   // reset released on the pixel clock
  logic           fval_q, lval_q, line_seen;
  logic [X_W-1:0] xcnt;
  logic [Y_W-1:0] ycnt;
  entry_t         went;
  logic           wen, wfull;

  always_ff @(posedge cam_pclk or negedge rst_n)
    if (!rst_n) {prst_q1, prst_q0} <= 2'b00;
    else        {prst_q1, prst_q0} <= {prst_q0, 1'b1};

  always_comb begin
    went       = '0;
    went.sof   = cam_fval && !fval_q;
    went.eof   = !cam_fval && fval_q;
    went.pv    = cam_fval && cam_lval;
    went.x     = (cam_fval && !fval_q) ? '0 : xcnt;
    went.y     = (cam_fval && !fval_q) ? '0 : ycnt;
    went.value = cam_data;
    wen        = went.sof || went.eof || went.pv;
  end

  always_ff @(posedge cam_pclk or negedge prst_q1) begin
    if (!prst_q1) begin
      fval_q    <= 1'b0;
      lval_q    <= 1'b0;
      line_seen <= 1'b0;
      xcnt      <= '0;
      ycnt      <= '0;
    end else begin
      fval_q <= cam_fval;
      lval_q <= cam_lval;
      if (cam_fval && !fval_q) begin              // frame start
        ycnt      <= '0;
        xcnt      <= went.pv ? X_W'(1) : '0;
        line_seen <= went.pv;
      end else if (went.pv) begin                 // pixel
        xcnt      <= xcnt + 1'b1;
        line_seen <= 1'b1;
      end else if (!cam_lval && lval_q && line_seen) begin  // line end
        ycnt      <= ycnt + 1'b1;
        xcnt      <= '0;
        line_seen <= 1'b0;
      end
    end
  end

  // the system clock outruns the pixel clock, so the FIFO never fills once
  // both of its sides are out of reset
  logic p_run;
  always_ff @(posedge cam_pclk or negedge prst_q1)
    if (!prst_q1) p_run <= 1'b0;
    else          p_run <= 1'b1;

  a_no_loss: assert property (@(posedge cam_pclk) disable iff (!rst_n)
                             !(p_run && wen && wfull))
    else $error("cmos_capture: pixel lost in clock crossing");

  // ---- crossing ----
  logic   ren, rempty;
  entry_t rent;
  logic [EW-1:0] rdata;

  async_fifo #(.W(EW), .AW(3)) u_fifo (
    .rst_n, .wclk(cam_pclk), .wen, .wdata(went), .full(wfull),
    .rclk(clk), .ren, .rdata, .empty(rempty));

  assign rent = entry_t'(rdata);

  // ---- system clock domain ----
  logic sof_sent;   // sof of the entry at the head already sent

  // an entry holding both a frame start and a pixel is read in two cycles
  assign ren = !rempty && !(rent.sof && rent.pv && !sof_sent);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sof_sent  <= 1'b0;
      frame_id  <= '0;
      pix_valid <= 1'b0;
      pix       <= '0;
      x         <= '0;
      y         <= '0;
      sof       <= 1'b0;
      eof       <= 1'b0;
    end else begin
      pix_valid <= 1'b0;
      sof       <= 1'b0;
      eof       <= 1'b0;
      if (!rempty) begin
        if (rent.sof && !sof_sent) begin
          sof      <= 1'b1;
          frame_id <= frame_id + 1'b1;
          sof_sent <= rent.pv;
        end else begin
          sof_sent <= 1'b0;
          eof      <= rent.eof;
          if (rent.pv) begin
            pix_valid <= 1'b1;
            pix       <= rent.value;
            x         <= rent.x;
            y         <= rent.y;
          end
        end
      end
    end
  end

endmodule
