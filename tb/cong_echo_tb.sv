// cong_echo_tb: self-checking testbench of cong_echo.
//
// Checks that a FECN mark on a channel sets the echo for that channel's ACKs, in the same cycle, and that clearing stops it.
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
module cong_echo_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  logic mark_valid = 1'b0, mark_fecn = 1'b0, q_ece, clr_valid = 1'b0; tpc_id_t mark_tpc = '0, q_tpc = '0, clr_tpc = '0; logic [15:0] mark_cnt;
  cong_echo #(.NUM_TPC(8)) dut (.*);

  initial begin
    reset_dut();
    @(negedge clk); mark_valid = 1'b1; mark_tpc = 10'd3; mark_fecn = 1'b1; q_tpc = 10'd3; #1 chk(q_ece, "same-cycle echo");
    @(negedge clk); mark_valid = 1'b0; #1 chk(q_ece, "echo held");
    q_tpc = 10'd4; #1 chk(!q_ece, "other channel clean");
    @(negedge clk); clr_valid = 1'b1; clr_tpc = 10'd3; @(negedge clk); clr_valid = 1'b0; q_tpc = 10'd3; #1 chk(!q_ece, "cleared");
    @(negedge clk); mark_valid = 1'b1; mark_fecn = 1'b0; @(negedge clk); mark_valid = 1'b0; #1 chk(!q_ece && mark_cnt == 16'd1, "unmarked packet");
    finish_tb();
  end
endmodule
