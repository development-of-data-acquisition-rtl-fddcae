// telemetry: turns raw centroid records into event packets for transmission.
//
// The serial link is far slower than the logic, so the divisions that the
// centroiding engine left undone are done here: two frac_dividers, one for X
// and one for Y, run in parallel on |numerator| / denominator and give the
// FRAC_BITS-bit sub-pixel fractions; the numerator's sign becomes the flag
// bit (1 = negative, as in the worked example where -12/289 carries flag 1).
// The packet fields and their order follow the event packet of the readout:
// frame ID, event ID, Xc integer, Xc fraction, Xc flag, Yc integer, Yc
// fraction, Yc flag, central intensity. One leading bit carries the
// multiple-event flag. With FRAC_BITS = 4 the packet is 56 bits, 7 bytes;
// with FRAC_BITS = 8 it is 64 bits, 8 bytes. Field widths and the use of the
// leading bit are this design's choices.
//
// Bytes leave most significant first on a byte_valid/byte_ready handshake.
// Timing: a record is taken (in_ready) only when the previous packet is
// fully sent; the division takes FRAC_BITS+1 cycles before the first byte.
module telemetry
  import pc_pkg::*;
#(
  parameter int unsigned FRAC_BITS = 4,
  localparam int unsigned PKT_BITS  = 48 + 2 * FRAC_BITS,
  localparam int unsigned PKT_BYTES = (PKT_BITS + 7) / 8
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  centroid_rec_t in_rec,
  output logic          in_ready,
  output logic          byte_valid,
  output logic [7:0]    byte_data,
  input  logic          byte_ready,
  output logic          pkt_done     // pulse: last byte of a packet taken
);

  typedef enum logic [1:0] {T_IDLE, T_DIV, T_SEND} state_e;
  state_e state;

  centroid_rec_t r;
  logic [PKT_BYTES*8-1:0] pkt;
  logic [$clog2(PKT_BYTES+1)-1:0] nbytes;

  logic                 div_start, xbusy, ybusy, xdone, ydone, xd, yd;
  logic [FRAC_BITS-1:0] xq, yq;
  logic [DEN_W-1:0]     xmag, ymag;

  always_comb begin
    xmag = r.x_num[NUM_W-1] ? DEN_W'(-r.x_num) : DEN_W'(r.x_num);
    ymag = r.y_num[NUM_W-1] ? DEN_W'(-r.y_num) : DEN_W'(r.y_num);
  end

  frac_divider #(.FRAC_BITS(FRAC_BITS)) u_xdiv (
    .clk, .rst_n, .start(div_start), .num(xmag), .den(r.den),
    .busy(xbusy), .done(xdone), .q(xq)
  );
  frac_divider #(.FRAC_BITS(FRAC_BITS)) u_ydiv (
    .clk, .rst_n, .start(div_start), .num(ymag), .den(r.den),
    .busy(ybusy), .done(ydone), .q(yq)
  );

  assign in_ready   = state == T_IDLE;
  assign byte_valid = state == T_SEND;
  assign byte_data  = pkt[PKT_BYTES*8-1 -: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= T_IDLE;
      r         <= '0;
      pkt       <= '0;
      nbytes    <= '0;
      div_start <= 1'b0;
      xd        <= 1'b0;
      yd        <= 1'b0;
      pkt_done  <= 1'b0;
    end else begin
      div_start <= 1'b0;
      pkt_done  <= 1'b0;
      case (state)
        T_IDLE: if (in_valid) begin
          r         <= in_rec;
          div_start <= 1'b1;
          xd        <= 1'b0;
          yd        <= 1'b0;
          state     <= T_DIV;
        end
        T_DIV: begin
          if (xdone) xd <= 1'b1;
          if (ydone) yd <= 1'b1;
          if ((xd || xdone) && (yd || ydone)) begin
            pkt <= (PKT_BYTES*8)'({r.multi, r.frame_id, r.event_id,
                                   r.x_int, xq, r.x_num[NUM_W-1],
                                   r.y_int, yq, r.y_num[NUM_W-1],
                                   r.intensity});
            nbytes <= ($clog2(PKT_BYTES+1))'(PKT_BYTES);
            state  <= T_SEND;
          end
        end
        T_SEND: if (byte_ready) begin
          pkt    <= pkt << 8;
          nbytes <= nbytes - 1'b1;
          if (nbytes == 1) begin
            state    <= T_IDLE;
            pkt_done <= 1'b1;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

endmodule
