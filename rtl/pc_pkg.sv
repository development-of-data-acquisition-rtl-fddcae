// pc_pkg: types and constants shared by the photon-counting readout.
//
// The image geometry (1280 columns, a five-row line store) and the 5x5
// centroiding window follow the detector described in the design notes; the
// 800-row frame height is the OV9215's full frame and is not stated there.
// Pixels are 8 bits, as in the hardware test of the centroider. The raw
// centroid record carries the sub-pixel numerators and the denominator
// undivided; the division happens only in the telemetry unit. The record
// packing (96 bits, six 16-bit SDRAM words) and the byte layout of the
// transmitted event packet are this design's own choices; the fields and
// their order are those of the event packet (frame ID, event ID, Xc integer,
// Xc fraction, Xc flag, Yc integer, Yc fraction, Yc flag, intensity).
package pc_pkg;

  localparam int unsigned PIX_W    = 8;     // pixel value width
  localparam int unsigned IMG_W    = 1280;  // pixels per row
  localparam int unsigned IMG_H    = 800;   // rows per frame
  localparam int unsigned X_W      = 11;    // column coordinate width
  localparam int unsigned Y_W      = 10;    // row coordinate width
  localparam int unsigned FRAME_W  = 8;     // frame ID width
  localparam int unsigned EVENT_W  = 8;     // event ID width (per frame)
  localparam int unsigned WIN      = 5;     // centroiding window size
  localparam int unsigned ROWS     = 5;     // rows kept on chip
  localparam int unsigned NUM_W    = 14;    // signed sub-pixel numerator
  localparam int unsigned DEN_W    = 13;    // window sum, 25 * 255 < 2^13
  localparam int unsigned SD_AW    = 24;    // SDRAM word address width
  localparam int unsigned SD_DW    = 16;    // SDRAM data width
  localparam int unsigned REC_WORDS = 6;    // SDRAM words per raw record

  typedef logic [PIX_W-1:0] pix_t;

  // 5x5 window: w[r][c], r = 0 is the oldest (top) row, c = 0 the oldest
  // (left) column; w[2][2] is the central pixel.
  typedef pix_t [WIN-1:0][WIN-1:0] window_t;

  // Raw centroid record produced by the centroiding engine.
  typedef struct packed {
    logic                    pad;
    logic [FRAME_W-1:0]      frame_id;
    logic [EVENT_W-1:0]      event_id;
    logic [X_W-1:0]          x_int;
    logic [Y_W-1:0]          y_int;
    logic signed [NUM_W-1:0] x_num;
    logic signed [NUM_W-1:0] y_num;
    logic [DEN_W-1:0]        den;
    pix_t                    intensity;
    pix_t                    corner_diff;  // max - min corner value
    logic                    multi;        // corner_diff above the multi threshold
  } centroid_rec_t;

  // SDRAM controller host side: one request held until acknowledged.
  typedef struct packed {
    logic             req;
    logic             we;
    logic [SD_AW-1:0] addr;
    logic [SD_DW-1:0] wdata;
  } sdram_req_t;

  typedef struct packed {
    logic             ack;    // one-cycle pulse: request done
    logic [SD_DW-1:0] rdata;  // read data, valid with ack
  } sdram_rsp_t;

  typedef enum logic {MODE_PHOTON = 1'b0, MODE_FRAME = 1'b1} mode_e;

endpackage
