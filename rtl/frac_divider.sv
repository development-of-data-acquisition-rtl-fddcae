// frac_divider: sub-pixel fraction of a centroid by repeated subtraction.
//
// Computes q = floor(num * 2^FRAC_BITS / den), the fractional pixel offset to
// FRAC_BITS bits, with a restoring shift-and-subtract loop: one quotient bit
// per clock, so a division takes FRAC_BITS cycles and FRAC_BITS = 6 or 8 buys
// accuracy for time, as the readout intends. The numerator is a magnitude;
// its sign travels separately as the packet's flag bit. A numerator at least
// as large as the denominator (an offset of a whole pixel or more) saturates
// to all ones, and a zero denominator gives zero; both are this design's
// choices.
//
// Timing: start is taken when busy is low; done pulses FRAC_BITS+1 cycles
// later with q valid until the next start.
module frac_divider
  import pc_pkg::*;
#(
  parameter int unsigned FRAC_BITS = 4
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [DEN_W-1:0]     num,   // magnitude of the numerator
  input  logic [DEN_W-1:0]     den,
  output logic                 busy,
  output logic                 done,
  output logic [FRAC_BITS-1:0] q
);

  logic [DEN_W:0]   rem;
  logic [DEN_W-1:0] d;
  logic [$clog2(FRAC_BITS+1)-1:0] cnt;
  logic             sat;
  logic [DEN_W:0]   rem2;

  always_comb rem2 = {rem[DEN_W-1:0], 1'b0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0;
      d    <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      sat  <= 1'b0;
      q    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          rem  <= {1'b0, num};
          d    <= den;
          sat  <= (num >= den) || (den == '0);
          cnt  <= '0;
          q    <= '0;
        end
      end else if (cnt == FRAC_BITS[$bits(cnt)-1:0]) begin
        busy <= 1'b0;
        done <= 1'b1;
        if (sat) q <= (d == '0) ? '0 : '1;
      end else begin
        cnt <= cnt + 1'b1;
        if (rem2 >= {1'b0, d}) begin
          rem <= rem2 - {1'b0, d};
          q   <= {q[FRAC_BITS-2:0], 1'b1};
        end else begin
          rem <= rem2;
          q   <= {q[FRAC_BITS-2:0], 1'b0};
        end
      end
    end
  end

endmodule
