// tp_tab_tb: self-checking testbench of tp_tab.
//
// Writes TP Channel configurations and reads them back on several read ports; unwritten entries read as invalid.
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
module tp_tab_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  logic wr_en = 1'b0; tpc_id_t wr_idx = '0; tpc_cfg_t wr_cfg = '0; tpc_id_t [2:0] rd_idx = '0; tpc_cfg_t [2:0] rd_cfg;
  tp_tab #(.NUM_TPC(16)) dut (.*);

  initial begin
    tpc_cfg_t c;
    reset_dut();
    c = '0; c.remote_cna = 16'd9; c.remote_tpn = 10'd4; c.selective = 1'b1; c.valid = 1'b1;
    @(negedge clk); wr_en = 1'b1; wr_idx = 10'd2; wr_cfg = c;
    @(negedge clk); wr_en = 1'b0;
    rd_idx[0] = 10'd2; rd_idx[2] = 10'd2; rd_idx[1] = 10'd3; #1;
    chk(rd_cfg[0] == c && rd_cfg[2] == c, "reads on two ports");
    chk(!rd_cfg[1].valid, "unwritten entry invalid");
    finish_tb();
  end
endmodule
