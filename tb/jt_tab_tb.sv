// jt_tab_tb: self-checking testbench of jt_tab.
//
// Writes Jetty records and reads them back on two read ports; unwritten entries read as zero.
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
module jt_tab_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  logic wr_en = 1'b0; jetty_id_t wr_idx = '0; jetty_rec_t wr_rec = '0; jetty_id_t [1:0] rd_idx = '0; jetty_rec_t [1:0] rd_rec;
  jt_tab #(.NUM_JETTY(16)) dut (.*);

  initial begin
    jetty_rec_t r;
    reset_dut();
    r = '0; r.jetty_id = 32'd5; r.token = 32'hAA; r.jfc_id = 32'd3; r.valid = 8'd1;
    @(negedge clk); wr_en = 1'b1; wr_idx = 10'd5; wr_rec = r;
    @(negedge clk); wr_idx = 10'd7; r.jetty_id = 32'd7; wr_rec = r;
    @(negedge clk); wr_en = 1'b0;
    rd_idx[0] = 10'd5; rd_idx[1] = 10'd7; #1;
    chk(rd_rec[0].jetty_id == 32'd5 && rd_rec[0].jfc_id == 32'd3 && rd_rec[0].valid == 8'd1, "port 0 reads");
    chk(rd_rec[1].jetty_id == 32'd7, "port 1 reads");
    rd_idx[1] = 10'd6; #1 chk(rd_rec[1] == '0, "empty entry");
    chk($bits(jetty_rec_t) <= 160, "record within the 20-byte budget");
    finish_tb();
  end
endmodule
