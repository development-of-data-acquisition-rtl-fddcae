// tb_centroid_calc: checks the undivided centroid against the worked 3x3
// example (centre 37: X numerator -12, Y numerator 6, sum 289) with SPAN = 3,
// and the full 5x5 first moments of the same window and of random windows
// with the default SPAN = 5, against sums computed here.
module tb_centroid_calc;
  import pc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic win_valid = 0;
  window_t w = '0;
  logic [X_W-1:0] cx = '0;
  logic [Y_W-1:0] cy = '0;

  logic                    v3, v5;
  logic [X_W-1:0]          xi3, xi5;
  logic [Y_W-1:0]          yi3, yi5;
  logic signed [NUM_W-1:0] xn3, yn3, xn5, yn5;
  logic [DEN_W-1:0]        d3, d5;
  pix_t                    i3, i5;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  centroid_calc #(.SPAN(3)) dut3 (
    .clk, .rst_n, .win_valid, .w, .cx, .cy, .out_valid(v3), .x_int(xi3),
    .y_int(yi3), .x_num(xn3), .y_num(yn3), .den(d3), .intensity(i3));
  centroid_calc dut5 (
    .clk, .rst_n, .win_valid, .w, .cx, .cy, .out_valid(v5), .x_int(xi5),
    .y_int(yi5), .x_num(xn5), .y_num(yn5), .den(d5), .intensity(i5));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic apply(input window_t win, input int x, input int y);
    @(negedge clk);
    w = win; cx = X_W'(x); cy = Y_W'(y); win_valid = 1;
    @(negedge clk);
    win_valid = 0;
  endtask

  // window from rows 1..5, columns 4..8 of the worked example
  localparam int fig5 [5][5] = '{
    '{16, 20, 22, 21, 17},
    '{22, 28, 31, 28, 22},
    '{27, 34, 37, 32, 24},
    '{27, 34, 35, 30, 23},
    '{23, 27, 28, 24, 18}};

  initial begin
    window_t win;
    int sx, sy, sd;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int r = 0; r < 5; r++) for (int c = 0; c < 5; c++) win[r][c] = pix_t'(fig5[r][c]);
    apply(win, 7, 25);
    check(v3 && v5, "valid");
    check(xi3 == 7 && yi3 == 25, "integer part");
    check(xn3 == -12, "3x3 X numerator -12");
    check(yn3 == 6, "3x3 Y numerator 6");
    check(d3 == 289, "3x3 sum 289");
    check(i3 == 37, "intensity 37");
    // 5x5: rows weighted +2,+1,0,-1,-2 top to bottom; columns likewise
    check(xn5 == 2*(16+20+22+21+17) + (22+28+31+28+22) - (27+34+35+30+23)
               - 2*(23+27+28+24+18), "5x5 X numerator");
    check(yn5 == 2*(16+22+27+27+23) + (20+28+34+34+27) - (21+28+32+30+24)
               - 2*(17+22+24+23+18), "5x5 Y numerator");
    check(d5 == 16+20+22+21+17+22+28+31+28+22+27+34+37+32+24+27+34+35+30+23+23+27+28+24+18,
          "5x5 sum");

    for (int t = 0; t < 200; t++) begin
      sx = 0; sy = 0; sd = 0;
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 5; c++) begin
          win[r][c] = pix_t'($urandom);
          sd += win[r][c];
          sx += (2 - r) * win[r][c];
          sy += (2 - c) * win[r][c];
        end
      apply(win, t, 2 * t);
      check(int'(xn5) == sx && int'(yn5) == sy && int'(d5) == sd, "random 5x5");
      check(i5 == win[2][2] && xi5 == X_W'(t) && yi5 == Y_W'(2 * t), "random centre");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
