// sdram_packet_fifo: centroid records buffered in SDRAM.
//
// Keeping every packet of a frame in on-chip registers limits the number of
// events per frame, so each record is written to SDRAM as soon as the
// centroiding engine produces it and read back when the telemetry unit asks
// for it. The SDRAM region from BASE holds a ring of CAP records, each
// REC_WORDS 16-bit words (most significant word first). In front of the SDRAM
// sits a small on-chip staging FIFO of STAGE records, because the engine
// cannot wait; when staging is full a new record is dropped and overflow
// pulses. Writes take the SDRAM port before reads. The ring, the staging
// depth and the drop-on-overflow policy are this design's choices.
//
// SDRAM port: sd_req.req is held with we/addr/wdata until sd_rsp.ack pulses;
// read data arrives with ack. Output: out_valid/out_ready handshake; a record
// is held until taken.
module sdram_packet_fifo
  import pc_pkg::*;
#(
  parameter int unsigned CAP   = 1 << 20,   // records in the SDRAM ring
  parameter logic [SD_AW-1:0] BASE = '0,
  parameter int unsigned STAGE = 4
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  centroid_rec_t in_rec,
  output logic          overflow,     // pulse: record dropped
  output logic          out_valid,
  output centroid_rec_t out_rec,
  input  logic          out_ready,
  output sdram_req_t    sd_req,
  input  sdram_rsp_t    sd_rsp,
  output logic [$clog2(CAP+1)-1:0] level  // records held in SDRAM
);

  localparam int unsigned RW = REC_WORDS;
  localparam int unsigned SW = (STAGE > 1) ? $clog2(STAGE) : 1;
  localparam int unsigned CW = $clog2(CAP);

  // staging FIFO
  centroid_rec_t    stage_mem [STAGE];
  logic [SW-1:0]    st_wp, st_rp;
  logic [SW:0]      st_cnt;
  logic             st_pop;

  // SDRAM side
  typedef enum logic [1:0] {S_IDLE, S_WRITE, S_READ} state_e;
  state_e           state;
  logic [CW-1:0]    wr_rec, rd_rec;
  logic [$clog2(RW)-1:0] word;
  logic [RW*SD_DW-1:0]   wbuf, rbuf;

  always_ff @(posedge clk) begin
    if (in_valid && st_cnt != (SW+1)'(STAGE)) stage_mem[st_wp] <= in_rec;
  end

  assign overflow = in_valid && st_cnt == (SW+1)'(STAGE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_wp  <= '0;
      st_rp  <= '0;
      st_cnt <= '0;
    end else begin
      if (in_valid && st_cnt != (SW+1)'(STAGE))
        st_wp <= (st_wp == SW'(STAGE - 1)) ? '0 : st_wp + 1'b1;
      if (st_pop)
        st_rp <= (st_rp == SW'(STAGE - 1)) ? '0 : st_rp + 1'b1;
      st_cnt <= st_cnt + (SW+1)'(in_valid && st_cnt != (SW+1)'(STAGE)) - (SW+1)'(st_pop);
    end
  end

  // start a write when staging holds a record and the ring has room; else a
  // read when the ring holds a record and the output register is free
  logic start_wr, start_rd;
  always_comb begin
    start_wr = state == S_IDLE && st_cnt != '0 && level != ($clog2(CAP+1))'(CAP);
    start_rd = state == S_IDLE && !start_wr && level != '0 && !out_valid;
    st_pop   = start_wr;
  end

  function automatic logic [SD_AW-1:0] addr_of(logic [CW-1:0] rec, logic [$clog2(RW)-1:0] wd);
    return BASE + SD_AW'(rec) * SD_AW'(RW) + SD_AW'(wd);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      wr_rec    <= '0;
      rd_rec    <= '0;
      word      <= '0;
      wbuf      <= '0;
      rbuf      <= '0;
      level     <= '0;
      sd_req    <= '0;
      out_valid <= 1'b0;
      out_rec   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start_wr) begin
            state      <= S_WRITE;
            wbuf       <= stage_mem[st_rp];
            word       <= '0;
            sd_req.req   <= 1'b1;
            sd_req.we    <= 1'b1;
            sd_req.addr  <= addr_of(wr_rec, '0);
            sd_req.wdata <= stage_mem[st_rp][RW*SD_DW-1 -: SD_DW];
          end else if (start_rd) begin
            state      <= S_READ;
            word       <= '0;
            sd_req.req   <= 1'b1;
            sd_req.we    <= 1'b0;
            sd_req.addr  <= addr_of(rd_rec, '0);
          end
        end
        S_WRITE: if (sd_rsp.ack) begin
          if (word == ($clog2(RW))'(RW - 1)) begin
            state      <= S_IDLE;
            sd_req.req <= 1'b0;
            wr_rec     <= (wr_rec == CW'(CAP - 1)) ? '0 : wr_rec + 1'b1;
            level      <= level + 1'b1;
          end else begin
            word         <= word + 1'b1;
            sd_req.addr  <= addr_of(wr_rec, word + 1'b1);
            sd_req.wdata <= wbuf[(RW-1-(int'(word)+1))*SD_DW +: SD_DW];
          end
        end
        S_READ: if (sd_rsp.ack) begin
          rbuf <= {rbuf[(RW-1)*SD_DW-1:0], sd_rsp.rdata};
          if (word == ($clog2(RW))'(RW - 1)) begin
            state      <= S_IDLE;
            sd_req.req <= 1'b0;
            rd_rec     <= (rd_rec == CW'(CAP - 1)) ? '0 : rd_rec + 1'b1;
            level      <= level - 1'b1;
            out_valid  <= 1'b1;
            out_rec    <= {rbuf[(RW-1)*SD_DW-1:0], sd_rsp.rdata};
          end else begin
            word        <= word + 1'b1;
            sd_req.addr <= addr_of(rd_rec, word + 1'b1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
