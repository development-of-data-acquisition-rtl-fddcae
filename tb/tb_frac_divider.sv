// tb_frac_divider: random divisions checked against floor(num * 2^F / den),
// including the saturating and zero-denominator cases, for 4-bit and 8-bit
// fractions; also checks that a division takes FRAC_BITS + 1 cycles.
module tb_frac_divider;
  import pc_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [DEN_W-1:0] num = '0, den = '0;
  logic busy4, done4, busy8, done8;
  logic [3:0] q4;
  logic [7:0] q8;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  frac_divider dut4 (.clk, .rst_n, .start, .num, .den, .busy(busy4), .done(done4), .q(q4));
  frac_divider #(.FRAC_BITS(8)) dut8 (.clk, .rst_n, .start, .num, .den, .busy(busy8),
                                      .done(done8), .q(q8));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s num=%0d den=%0d q4=%0d q8=%0d", what, num, den, q4, q8);
    end
  endtask

  function automatic int expq(int n, int d, int f);
    if (d == 0) return 0;
    if (n >= d) return (1 << f) - 1;
    return (n * (1 << f)) / d;
  endfunction

  initial begin
    int c4, c8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      den = DEN_W'($urandom % 6400);
      if (t % 10 == 0)      num = den + DEN_W'($urandom % 5);
      else if (t % 37 == 0) den = '0;
      else                  num = (den == 0) ? '0 : DEN_W'($urandom % den);
      if (t == 1) begin num = 12; den = 289; end   // worked example
      start = 1;
      @(negedge clk);
      start = 0;
      // count clock edges after the one that takes start
      c4 = 0; c8 = 0;
      for (int k = 1; k <= 12; k++) begin
        @(negedge clk);
        if (done4) c4 = k;
        if (done8) c8 = k;
      end
      check(int'(q8) == expq(num, den, 8), "8-bit quotient");
      check(int'(q4) == expq(num, den, 4), "4-bit quotient");
      check(c8 == 9, "8-bit latency");
      check(c4 == 5, "4-bit latency");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
