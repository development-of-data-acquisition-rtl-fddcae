// sdram_model: behavioural stand-in for the SDRAM chip and its controller's
// host port (not synthesizable). A request held on req is acknowledged after
// LAT cycles, plus a random extra delay of up to JITTER cycles; writes store
// wdata, reads return the stored word with ack. The cycle after an ack is
// not sampled, since the host updates its request on that edge. Memory holds
// 2^AW words.
module sdram_model
  import pc_pkg::*;
#(
  parameter int unsigned AW     = 21,
  parameter int unsigned LAT    = 2,
  parameter int unsigned JITTER = 0
)(
  input  logic       clk,
  input  sdram_req_t req,
  output sdram_rsp_t rsp
);

  logic [SD_DW-1:0] mem [1 << AW];
  int unsigned      wait_cnt = 0;
  logic             in_flight = 1'b0;
  int unsigned      n_writes = 0, n_reads = 0;
  int unsigned      extra_lat = 0;   // set by a testbench to slow the SDRAM down

  initial rsp = '0;

  always @(posedge clk) begin
    rsp.ack <= 1'b0;
    if (req.req && !in_flight && !rsp.ack) begin
      in_flight <= 1'b1;
      wait_cnt  <= LAT + extra_lat + ((JITTER > 0) ? ($urandom % (JITTER + 1)) : 0);
    end else if (in_flight) begin
      if (wait_cnt <= 1) begin
        in_flight <= 1'b0;
        rsp.ack   <= 1'b1;
        if (req.we) begin
          mem[req.addr[AW-1:0]] <= req.wdata;
          n_writes <= n_writes + 1;
        end else begin
          rsp.rdata <= mem[req.addr[AW-1:0]];
          n_reads   <= n_reads + 1;
        end
      end else begin
        wait_cnt <= wait_cnt - 1;
      end
    end
  end

endmodule
