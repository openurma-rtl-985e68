// cqe_stream_tb: self-checking testbench of cqe_stream.
//
// Checks per-queue FIFO order of completion entries, polling of an empty queue, and back-pressure when a queue is full.
//
// How: stimulus is applied on the falling clock edge from tasks and the
// outputs are sampled on the rising edge into queues, which the checks then
// inspect. Latencies are counted in clock cycles from the rising edge that
// accepts the input to the rising edge that first sees the output valid.
// Interface: the device's own ports, driven directly; shared clock, reset,
// check counters and a watchdog come from tb_common.svh. The checked
// latencies are the design's stated per-stage numbers; the stimulus values,
// table contents and reduced sizes are this testbench's own choices.
`timescale 1ns/1ps
module cqe_stream_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  logic in_valid = 1'b0, in_ready, poll_valid = 1'b0, poll_ok; cqe_t in_cqe = '0, poll_cqe; logic [7:0] poll_jfc = '0; logic [15:0] wr_cnt;
  cqe_stream #(.NUM_CQ(4), .CQ_DEPTH(4)) dut (.*);

  initial begin
    cqe_t c;
    reset_dut();
    for (int k = 0; k < 4; k++) begin
      c = '0; c.jfc = 8'(k % 2); c.tsn = 16'(k);
      @(negedge clk); in_valid = 1'b1; in_cqe = c;
    end
    @(negedge clk); in_valid = 1'b0;
    poll_valid = 1'b1; poll_jfc = 8'd1;
    @(negedge clk); chk(poll_ok && poll_cqe.tsn == 16'd1, "queue 1 first entry");
    @(negedge clk); chk(poll_ok && poll_cqe.tsn == 16'd3, "queue 1 second entry");
    @(negedge clk); chk(!poll_ok, "queue 1 empty");
    poll_jfc = 8'd0;
    @(negedge clk); chk(poll_ok && poll_cqe.tsn == 16'd0, "queue 0 entry");
    poll_valid = 1'b0;
    c = '0; c.jfc = 8'd2;
    for (int k = 0; k < 4; k++) begin @(negedge clk); in_valid = 1'b1; in_cqe = c; end
    @(negedge clk); #1 chk(!in_ready, "full queue back-pressures");
    in_valid = 1'b0;
    chk(wr_cnt == 16'd8, "write count");
    finish_tb();
  end
endmodule
