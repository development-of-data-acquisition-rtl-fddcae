// detector_top: FPGA data acquisition and processing for the intensified
// CMOS photon-counting detector.
//
// The CMOS sensor's pixel stream (pixel clock, line-valid, frame-valid, 8-bit
// pixel) enters through cmos_capture. Two operating modes share the SDRAM and
// the outputs, selected by the mode input:
//   MODE_PHOTON  photon counting: centroid_engine finds photon events in
//                5x5 windows and produces raw centroid records, which
//                sdram_packet_fifo saves to SDRAM as they come; telemetry
//                reads them back, divides out the sub-pixel fractions and
//                sends 7-byte event packets over the RS232 line (uart_tx), or
//                to the SD card when log_to_sd is set.
//   MODE_FRAME   continuous frame transfer: frame_transfer stores each frame
//                in SDRAM, tagged with frame and row numbers, and copies it to
//                the SD card.
// In the original instrument the two modes are two FPGA configurations; here
// both live in one design behind a mode input, which should only be changed
// between frames. The SDRAM controller, the SD-card (SPI) controller and the
// PLL that makes the sensor's master clock are third-party parts outside this
// design: their host-side signals are ports here. One clock (40 MHz in the
// instrument) runs everything.
module detector_top
  import pc_pkg::*;
#(
  parameter int unsigned WIDTH        = IMG_W,   // line buffer length
  parameter int unsigned SPAN         = WIN,     // centroid span (5 or 3)
  parameter int unsigned FRAC_BITS    = 4,       // sub-pixel fraction bits
  parameter int unsigned CLKS_PER_BIT = 87,      // 40 MHz / 460.8 kbaud
  parameter int unsigned CAP          = 1 << 20  // records in the SDRAM ring
)(
  input  logic       clk,
  input  logic       rst_n,
  // CMOS sensor
  input  logic       cam_pclk,
  input  logic       cam_fval,
  input  logic       cam_lval,
  input  pix_t       cam_data,
  // configuration
  input  mode_e      mode,
  input  pix_t       thr_floor,
  input  pix_t       multi_thr,
  input  logic       reject_multi,
  input  logic       log_to_sd,
  // SDRAM controller host port
  output sdram_req_t sdram_req,
  input  sdram_rsp_t sdram_rsp,
  // SD-card controller byte port
  output logic       sd_valid,
  output logic [7:0] sd_data,
  input  logic       sd_ready,
  // RS232 to host
  output logic       uart_txd,
  // status pulses
  output logic       st_event,        // centroid record produced
  output logic       st_hot,          // hot pixel rejected
  output logic       st_multi,        // multiple event flagged
  output logic       st_multi_drop,   // multiple event dropped
  output logic       st_pkt_overflow, // record lost before SDRAM
  output logic       st_pkt_sent,     // event packet sent
  output logic       st_pix_overflow, // frame-mode pixel lost
  output logic       st_frame_skip,   // frame-mode frame skipped
  output logic       st_frame_done    // frame copied to SD card
);

  logic               pix_valid, sof, eof;
  pix_t               pix;
  logic [X_W-1:0]     x;
  logic [Y_W-1:0]     y;
  logic [FRAME_W-1:0] frame_id;

  cmos_capture u_cap (
    .clk, .rst_n, .cam_pclk, .cam_fval, .cam_lval, .cam_data,
    .pix_valid, .pix, .x, .y, .frame_id, .sof, .eof
  );

  // ---------------- photon counting path ----------------
  logic          photon;
  logic          rec_valid;
  centroid_rec_t rec;
  logic          q_valid, q_ready;
  centroid_rec_t q_rec;
  sdram_req_t    pf_req, ft_req;
  sdram_rsp_t    pf_rsp, ft_rsp;
  logic [$clog2(CAP+1)-1:0] level;

  assign photon = mode == MODE_PHOTON;

  centroid_engine #(.WIDTH(WIDTH), .SPAN(SPAN)) u_eng (
    .clk, .rst_n, .pix_valid(pix_valid && photon), .pix, .x, .y, .frame_id,
    .sof, .thr_floor, .multi_thr, .reject_multi,
    .rec_valid, .rec, .hot_seen(st_hot), .multi_seen(st_multi),
    .multi_dropped(st_multi_drop)
  );

  assign st_event = rec_valid;

  sdram_packet_fifo #(.CAP(CAP)) u_pfifo (
    .clk, .rst_n, .in_valid(rec_valid), .in_rec(rec),
    .overflow(st_pkt_overflow),
    .out_valid(q_valid), .out_rec(q_rec), .out_ready(q_ready),
    .sd_req(pf_req), .sd_rsp(pf_rsp), .level
  );

  logic       t_valid, t_ready, u_ready;
  logic [7:0] t_data;

  telemetry #(.FRAC_BITS(FRAC_BITS)) u_tel (
    .clk, .rst_n, .in_valid(q_valid), .in_rec(q_rec), .in_ready(q_ready),
    .byte_valid(t_valid), .byte_data(t_data), .byte_ready(t_ready),
    .pkt_done(st_pkt_sent)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .in_valid(t_valid && !log_to_sd), .in_data(t_data),
    .in_ready(u_ready), .txd(uart_txd)
  );

  // ---------------- frame transfer path ----------------
  logic       f_valid;
  logic [7:0] f_data;

  frame_transfer u_ft (
    .clk, .rst_n, .enable(!photon), .pix_valid, .pix, .y, .frame_id,
    .sof, .eof, .sd_req(ft_req), .sd_rsp(ft_rsp),
    .sd_valid(f_valid), .sd_data(f_data), .sd_ready(sd_ready && !photon),
    .overflow(st_pix_overflow), .frame_skipped(st_frame_skip),
    .frame_done(st_frame_done)
  );

  // ---------------- shared SDRAM and SD card ----------------
  always_comb begin
    sdram_req    = photon ? pf_req : ft_req;
    pf_rsp       = sdram_rsp;
    ft_rsp       = sdram_rsp;
    pf_rsp.ack   = sdram_rsp.ack && photon;
    ft_rsp.ack   = sdram_rsp.ack && !photon;
    if (photon) begin
      sd_valid = t_valid && log_to_sd;
      sd_data  = t_data;
    end else begin
      sd_valid = f_valid;
      sd_data  = f_data;
    end
    t_ready = log_to_sd ? sd_ready : u_ready;
  end

endmodule
