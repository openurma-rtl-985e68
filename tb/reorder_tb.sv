// reorder_tb: self-checking testbench of reorder.
//
// Checks storing out-of-order packets, duplicate rejection, lookup by channel and PSN, freeing on lookup and the full condition.
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
module reorder_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  logic ins_valid = 1'b0, ins_ok, lk_valid = 1'b0, lk_hit; tpc_id_t ins_tpc = '0, lk_tpc = '0; pkt_t ins_pkt = '0, lk_pkt; psn_t lk_psn = '0; logic [7:0] occupancy;
  reorder #(.SLOTS(4)) dut (.*);

  initial begin
    pkt_t p;
    reset_dut();
    for (int k = 0; k < 4; k++) begin
      p = '0; p.psn = 24'(10 + k); p.data = 64'(k);
      @(negedge clk); ins_valid = 1'b1; ins_tpc = 10'd1; ins_pkt = p; #1 chk(ins_ok, "insert accepted");
    end
    @(negedge clk); ins_pkt.psn = 24'd10; #1 chk(!ins_ok, "duplicate rejected");
    ins_tpc = 10'd2; #1 chk(!ins_ok, "full");
    @(negedge clk); ins_valid = 1'b0;
    chk(occupancy == 8'd4, "occupancy");
    lk_valid = 1'b1; lk_tpc = 10'd1; lk_psn = 24'd12; #1 chk(lk_hit && lk_pkt.data == 64'd2, "lookup hit");
    lk_tpc = 10'd2; #1 chk(!lk_hit, "other channel misses");
    lk_tpc = 10'd1;
    @(negedge clk); lk_valid = 1'b0;
    chk(occupancy == 8'd3, "freed on lookup");
    finish_tb();
  end
endmodule
