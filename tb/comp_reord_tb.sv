// comp_reord_tb: self-checking testbench of comp_reord.
//
// Checks issue-order completion: an in-order-requested completion that arrives early is held until the earlier ones of its Jetty have passed, while arrival-order completions flow freely.
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
module comp_reord_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1; cqe_t in_cqe = '0, out_cqe; logic [15:0] park_cnt;
  cqe_t outs [$];
  always @(posedge clk) if (out_valid && out_ready) outs.push_back(out_cqe);
  task automatic sendc(cqe_t c);
    @(negedge clk); in_valid = 1'b1; in_cqe = c;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 1'b0;
  endtask
  comp_reord #(.NUM_JETTY(8)) dut (.*);

  initial begin
    cqe_t c;
    reset_dut();
    c = '0; c.jetty = 10'd1; c.comp_ord = 1'b1;
    c.tsn = 16'd1; sendc(c);
    c.tsn = 16'd2; sendc(c);
    c.jetty = 10'd2; c.tsn = 16'd0; sendc(c);
    repeat (3) @(posedge clk);
    chk(outs.size() == 1 && outs[0].jetty == 10'd2, "early completions parked, other Jetty passes");
    chk(park_cnt == 16'd2, "two parked");
    c.jetty = 10'd1; c.tsn = 16'd0; sendc(c);
    repeat (6) @(posedge clk);
    chk(outs.size() == 4, "all released");
    chk(outs[1].tsn == 16'd0 && outs[2].tsn == 16'd1 && outs[3].tsn == 16'd2, "issue order");
    c.comp_ord = 1'b0; c.tsn = 16'd9; sendc(c); repeat (2) @(posedge clk);
    chk(outs.size() == 5, "arrival-order completion not held");
    finish_tb();
  end
endmodule
