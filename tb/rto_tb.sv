// rto_tb: self-checking testbench of rto.
//
// Checks that an armed channel times out after the base interval, that the interval doubles after each expiry (exponential back-off), and that disarming stops it.
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
module rto_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  logic tmr_valid = 1'b0, tmr_busy = 1'b0, fire_valid, fire_ready = 1'b1; tpc_id_t tmr_tpc = '0, fire_tpc; logic [15:0] fire_cnt;
  tpc_id_t fires [$]; int ft [$];
  always @(posedge clk) if (fire_valid && fire_ready) begin fires.push_back(fire_tpc); ft.push_back(cyc); end
  rto #(.NUM_TPC(8), .RTO_BASE(64)) dut (.*);

  initial begin
    int t0, t1, t2;
    reset_dut();
    @(negedge clk); tmr_valid = 1'b1; tmr_tpc = 10'd2; tmr_busy = 1'b1; t0 = cyc;
    @(negedge clk); tmr_valid = 1'b0;
    while (fires.size() < 1) @(posedge clk);
    t1 = ft[0];
    chk(fires[0] == 10'd2, "expired channel");
    chk(t1 - t0 >= 64 && t1 - t0 <= 64 + 8, $sformatf("first expiry after base interval, got %0d", t1 - t0));
    while (fires.size() < 2) @(posedge clk);
    t2 = ft[1];
    chk(t2 - t1 >= 128 && t2 - t1 <= 128 + 8, $sformatf("back-off doubles, got %0d", t2 - t1));
    @(negedge clk); tmr_valid = 1'b1; tmr_busy = 1'b0;
    @(negedge clk); tmr_valid = 1'b0;
    repeat (600) @(posedge clk);
    chk(fires.size() == 2 && fire_cnt == 16'd2, "disarmed channel is silent");
    finish_tb();
  end
endmodule
