// frame_transfer: continuous frame transfer (camera) mode.
//
// In bright light the detector works as a camera: every pixel of a frame is
// stored in SDRAM and, once the frame has been read out of the sensor, the
// stored frame is copied to the SD card. The SDRAM is 16 bits wide and pixels
// are only PIX_W bits, so the spare upper bits of each word hold the low bits
// of the frame number and of the row number, which lets the host check for
// missing frames and incomplete rows. With 8-bit pixels the word is
// {frame[3:0], row[3:0], pixel[7:0]}; that split of the spare bits, the
// sequential addressing from BASE, the big-endian byte order towards the SD
// card and skipping frames that start while a copy is still running are this
// design's choices.
//
// Pixels pass through a STAGE-deep on-chip FIFO to the SDRAM port, since the
// SDRAM may be slower than a pixel now and then; a pixel arriving at a full
// FIFO is lost and counted by overflow. STAGE must be a power of two. SDRAM port: as in sdram_packet_fifo.
// SD card side: bytes on sd_valid/sd_ready; frame_done pulses after the last
// byte of a frame.
module frame_transfer
  import pc_pkg::*;
#(
  parameter logic [SD_AW-1:0] BASE = '0,
  parameter int unsigned STAGE = 8
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               enable,
  input  logic               pix_valid,
  input  pix_t               pix,
  input  logic [Y_W-1:0]     y,
  input  logic [FRAME_W-1:0] frame_id,
  input  logic               sof,
  input  logic               eof,
  output sdram_req_t         sd_req,
  input  sdram_rsp_t         sd_rsp,
  output logic               sd_valid,
  output logic [7:0]         sd_data,
  input  logic               sd_ready,
  output logic               overflow,      // pulse: pixel lost
  output logic               frame_skipped, // pulse: frame not stored
  output logic               frame_done     // pulse: frame copied out
);

  localparam int unsigned SPARE = SD_DW - PIX_W;
  localparam int unsigned FB    = SPARE / 2;      // frame bits
  localparam int unsigned RB    = SPARE - FB;     // row bits
  localparam int unsigned SW    = $clog2(STAGE);

  typedef enum logic [1:0] {F_IDLE, F_STORE, F_COPY} state_e;
  state_e state;

  logic [SD_DW-1:0] stage_mem [STAGE];
  logic [SW-1:0]    st_wp, st_rp;
  logic [SW:0]      st_cnt;
  logic             push, pop;
  logic [SD_DW-1:0] word_in;

  logic [SD_AW-1:0] n_words;   // words stored in this frame
  logic [SD_AW-1:0] wr_addr, rd_addr;
  logic             ended;     // eof seen during F_STORE
  logic             busy;      // SDRAM request outstanding
  logic [SD_DW-1:0] rword;
  logic             have_word, low_byte;

  assign word_in  = {frame_id[FB-1:0], y[RB-1:0], pix};
  assign push     = state == F_STORE && pix_valid && st_cnt != (SW+1)'(STAGE);
  assign overflow = state == F_STORE && pix_valid && st_cnt == (SW+1)'(STAGE);
  assign pop      = state == F_STORE && !busy && st_cnt != '0;

  always_ff @(posedge clk) begin
    if (push) stage_mem[st_wp] <= word_in;
  end

  assign sd_valid = state == F_COPY && have_word;
  assign sd_data  = low_byte ? rword[7:0] : rword[15:8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= F_IDLE;
      st_wp         <= '0;
      st_rp         <= '0;
      st_cnt        <= '0;
      n_words       <= '0;
      wr_addr       <= '0;
      rd_addr       <= '0;
      ended         <= 1'b0;
      busy          <= 1'b0;
      sd_req        <= '0;
      rword         <= '0;
      have_word     <= 1'b0;
      low_byte      <= 1'b0;
      frame_skipped <= 1'b0;
      frame_done    <= 1'b0;
    end else begin
      frame_skipped <= 1'b0;
      frame_done    <= 1'b0;
      if (push) st_wp <= st_wp + 1'b1;
      if (pop)  st_rp <= st_rp + 1'b1;
      st_cnt <= st_cnt + (SW+1)'(push) - (SW+1)'(pop);

      case (state)
        F_IDLE: if (sof) begin
          if (enable) begin
            state   <= F_STORE;
            n_words <= '0;
            wr_addr <= BASE;
            ended   <= 1'b0;
          end
        end
        F_STORE: begin
          if (eof) ended <= 1'b1;
          if (pop) begin
            busy         <= 1'b1;
            sd_req.req   <= 1'b1;
            sd_req.we    <= 1'b1;
            sd_req.addr  <= wr_addr;
            sd_req.wdata <= stage_mem[st_rp];
          end
          if (busy && sd_rsp.ack) begin
            busy       <= 1'b0;
            sd_req.req <= 1'b0;
            wr_addr    <= wr_addr + 1'b1;
            n_words    <= n_words + 1'b1;
          end
          if ((ended || eof) && !busy && st_cnt == '0 && !push) begin
            state     <= F_COPY;
            rd_addr   <= BASE;
            have_word <= 1'b0;
          end
        end
        F_COPY: begin
          if (!have_word && !busy) begin
            if (rd_addr == BASE + n_words) begin
              state      <= F_IDLE;
              frame_done <= 1'b1;
            end else begin
              busy        <= 1'b1;
              sd_req.req  <= 1'b1;
              sd_req.we   <= 1'b0;
              sd_req.addr <= rd_addr;
            end
          end
          if (busy && sd_rsp.ack) begin
            busy       <= 1'b0;
            sd_req.req <= 1'b0;
            rword      <= sd_rsp.rdata;
            have_word  <= 1'b1;
            low_byte   <= 1'b0;
            rd_addr    <= rd_addr + 1'b1;
          end
          if (have_word && sd_ready) begin
            if (low_byte) have_word <= 1'b0;
            low_byte <= !low_byte;
          end
        end
        default: state <= F_IDLE;
      endcase

      if (sof && enable && state != F_IDLE) frame_skipped <= 1'b1;
    end
  end

endmodule
