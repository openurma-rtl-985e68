// mr_tab_tb: self-checking testbench of mr_tab.
//
// Checks memory-region permission: bounds, token and per-kind permission on several check ports.
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
module mr_tab_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  logic wr_en = 1'b0; mr_key_t wr_key = '0; mr_rec_t wr_rec = '0;
  mr_key_t [2:0] chk_key = '0; logic [2:0][31:0] chk_addr = '0; logic [2:0][15:0] chk_len = '0; logic [2:0][31:0] chk_token = '0;
  logic [2:0][2:0] chk_kind = '0; logic [2:0] chk_ok;
  mr_tab dut (.*);

  initial begin
    mr_rec_t r;
    reset_dut();
    r = '0; r.base = 32'h100; r.len = 32'h100; r.token = 32'h55; r.perm_r = 1'b1; r.perm_w = 1'b0; r.perm_a = 1'b1; r.valid = 1'b1;
    @(negedge clk); wr_en = 1'b1; wr_key = 6'd3; wr_rec = r;
    @(negedge clk); wr_en = 1'b0;
    for (int i = 0; i < 3; i++) begin chk_key[i] = 6'd3; chk_addr[i] = 32'h1F8; chk_len[i] = 16'd8; chk_token[i] = 32'h55; end
    chk_kind[0] = 3'b001; chk_kind[1] = 3'b010; chk_kind[2] = 3'b100; #1;
    chk(chk_ok == 3'b101, "read and atomic allowed, write denied");
    chk_addr[0] = 32'h1FC; #1 chk(!chk_ok[0], "crossing the end denied");
    chk_addr[0] = 32'hF8;  #1 chk(!chk_ok[0], "below base denied");
    chk_addr[0] = 32'h100; chk_token[0] = 32'h56; #1 chk(!chk_ok[0], "bad token denied");
    chk_token[0] = 32'h55; chk_key[0] = 6'd4; #1 chk(!chk_ok[0], "invalid key denied");
    chk_key[0] = 6'd3; #1 chk(chk_ok[0], "in bounds allowed");
    finish_tb();
  end
endmodule
