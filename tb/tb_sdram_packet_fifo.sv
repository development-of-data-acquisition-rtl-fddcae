// tb_sdram_packet_fifo: pushes random centroid records into the SDRAM-backed
// buffer (ring of 8 records, 4-record staging) over a model SDRAM with
// random latency, drains them with a randomly stalling consumer, and checks
// that every record not reported as dropped comes out once, unchanged and in
// order, that each record costs six SDRAM writes and six reads, that the ring
// level never exceeds its capacity, and that a long burst with the consumer
// stopped does overflow.
module tb_sdram_packet_fifo;
  import pc_pkg::*;

  localparam int CAP = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, overflow, out_valid, out_ready = 0;
  centroid_rec_t in_rec = '0, out_rec;
  sdram_req_t sd_req;
  sdram_rsp_t sd_rsp;
  logic [$clog2(CAP+1)-1:0] level;
  centroid_rec_t exp_q [$];
  int checks = 0, failures = 0, n_over = 0, n_out = 0, n_in = 0;
  bit drain = 1;

  always #5 clk = ~clk;

  sdram_packet_fifo #(.CAP(CAP), .BASE(24'h100)) dut (.*);
  sdram_model #(.AW(12), .LAT(2), .JITTER(3)) sdram (.clk, .req(sd_req), .rsp(sd_rsp));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid) begin
      if (overflow) n_over++;
      else begin exp_q.push_back(in_rec); n_in++; end
    end
    if (out_valid && out_ready) begin
      n_out++;
      check(exp_q.size() > 0, "record expected");
      if (exp_q.size() > 0) check(out_rec == exp_q.pop_front(), "record content and order");
    end
    check(level <= CAP, "ring level");
    if (sd_req.req) check(sd_req.addr >= 24'h100 && sd_req.addr < 24'h100 + 6 * CAP, "address range");
    out_ready <= drain && ($urandom % 3 != 0);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // sparse traffic
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_rec = centroid_rec_t'({$urandom, $urandom, $urandom});
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom % 200) @(negedge clk);
    end
    // burst with the consumer stopped: must overflow
    drain = 0;
    repeat (40) @(negedge clk);
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_rec = centroid_rec_t'({$urandom, $urandom, $urandom});
      repeat (3) begin
        @(negedge clk);
        in_valid = 0;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (400) @(negedge clk);
    check(level == CAP, "ring full while stopped");
    drain = 1;
    repeat (3000) @(negedge clk);
    check(n_over > 0, "overflow happened");
    check(exp_q.size() == 0 && n_out == n_in, "all records out");
    check(sdram.n_writes == 6 * n_in && sdram.n_reads == 6 * n_out, "SDRAM traffic");
    $display("records in %0d, out %0d, dropped %0d", n_in, n_out, n_over);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
