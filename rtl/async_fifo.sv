// async_fifo: small first-in first-out buffer between two unrelated clocks.
//
// Carries the captured pixel stream from the sensor's pixel clock into the
// system clock. The write and read pointers are kept in binary for
// addressing and in Gray code for crossing: each side passes its Gray
// pointer through a two-flop synchroniser to the other side, where it is
// compared with the local pointer to give full (write side) and empty (read
// side). Both flags are pessimistic, never wrong. The storage is a
// 2^AW-entry register array, written on the write clock and read
// asynchronously at the read pointer, so rdata shows the oldest entry
// whenever empty is low and ren pops it. A write while full is ignored.
// The design is the standard Gray-pointer FIFO; nothing here comes from the
// detector's description beyond the need to move pixels between the clocks.
//
// Reset: rst_n is asserted asynchronously in both domains and released
// through a two-flop synchroniser in each, so each side leaves reset on its
// own clock edge. Until then full (write side) and empty (read side) stay
// high, so nothing is written or read by a side still in reset.
module async_fifo #(
  parameter int unsigned W  = 32,   // entry width
  parameter int unsigned AW = 3     // log2 of the depth
)(
  input  logic         rst_n,
  // write side
  input  logic         wclk,
  input  logic         wen,
  input  logic [W-1:0] wdata,
  output logic         full,
  // read side
  input  logic         rclk,
  input  logic         ren,
  output logic [W-1:0] rdata,
  output logic         empty
);

  logic [W-1:0]  mem [1 << AW];
  logic [AW:0]   wbin, wgray, rbin, rgray;
  logic [AW:0]   wq_rgray0, wq_rgray1;   // read pointer seen by the write side
  logic [AW:0]   rq_wgray0, rq_wgray1;   // write pointer seen by the read side
  logic          wrst_q0, wrst_n, rrst_q0, rrst_n;   // released resets
  logic [AW:0]   wbin_nx, rbin_nx;

  function automatic logic [AW:0] to_gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  always_ff @(posedge wclk or negedge rst_n)
    if (!rst_n) {wrst_n, wrst_q0} <= 2'b00;
    else        {wrst_n, wrst_q0} <= {wrst_q0, 1'b1};

  always_ff @(posedge rclk or negedge rst_n)
    if (!rst_n) {rrst_n, rrst_q0} <= 2'b00;
    else        {rrst_n, rrst_q0} <= {rrst_q0, 1'b1};

  // write side
  assign full    = !wrst_n || (wgray == {~wq_rgray1[AW:AW-1], wq_rgray1[AW-2:0]});
  assign wbin_nx = wbin + (AW+1)'(wen && !full);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin      <= '0;
      wgray     <= '0;
      wq_rgray0 <= '0;
      wq_rgray1 <= '0;
    end else begin
      wbin      <= wbin_nx;
      wgray     <= to_gray(wbin_nx);
      wq_rgray0 <= rgray;
      wq_rgray1 <= wq_rgray0;
    end
  end

  always_ff @(posedge wclk)
    if (wen && !full) mem[wbin[AW-1:0]] <= wdata;

  // read side
  assign empty   = !rrst_n || (rgray == rq_wgray1);
  assign rbin_nx = rbin + (AW+1)'(ren && !empty);
  assign rdata   = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin      <= '0;
      rgray     <= '0;
      rq_wgray0 <= '0;
      rq_wgray1 <= '0;
    end else begin
      rbin      <= rbin_nx;
      rgray     <= to_gray(rbin_nx);
      rq_wgray0 <= wgray;
      rq_wgray1 <= rq_wgray0;
    end
  end

endmodule
