// tb_telemetry: feeds raw centroid records to two telemetry units (4-bit and
// 8-bit fractions) with a randomly stalling byte sink, and rebuilds each
// packet from the bytes received. Checks the worked example (Xc 7, -12/289;
// Yc 25, 6/289; intensity 37; frame 5, event 1: 8-bit fractions 10/256 and
// 5/256, about 0.04 and 0.02, X flag 1, Y flag 0), the packet lengths of 7
// and 8 bytes, and random records against fractions computed here.
module tb_telemetry;
  import pc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  centroid_rec_t in_rec = '0;
  logic rdy4, rdy8, bv4, bv8, br4 = 0, br8 = 0, pd4, pd8;
  logic [7:0] bd4, bd8;
  logic [7:0] got4 [$], got8 [$];
  int checks = 0, failures = 0, n_pkt4 = 0, n_pkt8 = 0;

  always #5 clk = ~clk;

  telemetry dut4 (.clk, .rst_n, .in_valid, .in_rec, .in_ready(rdy4),
                  .byte_valid(bv4), .byte_data(bd4), .byte_ready(br4), .pkt_done(pd4));
  telemetry #(.FRAC_BITS(8)) dut8 (.clk, .rst_n, .in_valid, .in_rec, .in_ready(rdy8),
                  .byte_valid(bv8), .byte_data(bd8), .byte_ready(br8), .pkt_done(pd8));

  always @(posedge clk) begin
    if (bv4 && br4 && rst_n) got4.push_back(bd4);
    if (bv8 && br8 && rst_n) got8.push_back(bd8);
    if (pd4 && rst_n) n_pkt4++;
    if (pd8 && rst_n) n_pkt8++;
    br4 <= ($urandom % 4) != 0;
    br8 <= ($urandom % 3) != 0;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic int frac(int num, int den, int f);
    int n;
    n = (num < 0) ? -num : num;
    if (den == 0) return 0;
    if (n >= den) return (1 << f) - 1;
    return (n << f) / den;
  endfunction

  // unpack a received packet of F-bit fractions and compare with the record
  task automatic compare(input centroid_rec_t r, input int f, ref logic [7:0] q [$]);
    logic [63:0] p;
    int nb, pos;
    nb = (48 + 2 * f + 7) / 8;
    check(q.size() >= nb, "bytes received");
    if (q.size() < nb) return;
    p = '0;
    for (int i = 0; i < nb; i++) p = (p << 8) | 64'(q.pop_front());
    pos = 0;
    check(p[pos +: 8] == r.intensity, "intensity");               pos += 8;
    check(p[pos] == r.y_num[NUM_W-1], "Y flag");                   pos += 1;
    check(int'(p[pos +: 8] & ((1 << f) - 1)) == frac(r.y_num, r.den, f), "Y fraction"); pos += f;
    check(p[pos +: Y_W] == r.y_int, "Y integer");                 pos += Y_W;
    check(p[pos] == r.x_num[NUM_W-1], "X flag");                   pos += 1;
    check(int'(p[pos +: 8] & ((1 << f) - 1)) == frac(r.x_num, r.den, f), "X fraction"); pos += f;
    check(p[pos +: X_W] == r.x_int, "X integer");                 pos += X_W;
    check(p[pos +: 8] == r.event_id, "event ID");                 pos += 8;
    check(p[pos +: 8] == r.frame_id, "frame ID");                 pos += 8;
    check(p[pos] == r.multi, "multiple flag");                     pos += 1;
    check(pos == 8 * nb, "packet length");
  endtask

  task automatic send(input centroid_rec_t r);
    @(negedge clk);
    in_rec = r; in_valid = 1;
    do @(posedge clk); while (!(rdy4 && rdy8));
    @(negedge clk);
    in_valid = 0;
    // wait for both packets
    while (!(rdy4 && rdy8 && !bv4 && !bv8)) @(negedge clk);
    repeat (2) @(negedge clk);
    compare(r, 4, got4);
    compare(r, 8, got8);
    check(got4.size() == 0 && got8.size() == 0, "no extra bytes");
  endtask

  initial begin
    centroid_rec_t r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    r = '0;
    r.frame_id = 5; r.event_id = 1; r.x_int = 7; r.y_int = 25;
    r.x_num = -12; r.y_num = 6; r.den = 289; r.intensity = 37;
    check(frac(-12, 289, 8) == 10 && frac(6, 289, 8) == 5, "example fractions");
    send(r);
    for (int t = 0; t < 200; t++) begin
      r = centroid_rec_t'({$urandom, $urandom, $urandom});
      r.den = DEN_W'(1 + $urandom % 6000);
      r.x_num = NUM_W'($signed(int'($urandom % (2 * r.den)) - int'(r.den)));
      r.y_num = NUM_W'($signed(int'($urandom % (2 * r.den)) - int'(r.den)));
      if (t % 20 == 0) r.x_num = NUM_W'(r.den + 3);
      send(r);
    end
    if (n_pkt4 != 201 || n_pkt8 != 201) $display("packets %0d %0d", n_pkt4, n_pkt8);
    check(n_pkt4 == 201 && n_pkt8 == 201, "packets counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
