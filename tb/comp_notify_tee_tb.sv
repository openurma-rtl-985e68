// comp_notify_tee_tb: self-checking testbench of comp_notify_tee.
//
// Checks that each completion is forwarded and copied once to the notification port.
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
module comp_notify_tee_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  cqe_t outs [$]; int ot [$];
  always @(posedge clk) if (out_valid && out_ready) begin outs.push_back(out_cqe); ot.push_back(cyc); end
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1, cn_valid; cqe_t in_cqe = '0, out_cqe, cn_cqe;
  cqe_t cns [$];
  always @(posedge clk) if (cn_valid) cns.push_back(cn_cqe);
  comp_notify_tee dut (.*);

  initial begin
    cqe_t c;
    int n0;
    reset_dut();
    c = '0; c.jetty = 10'd2; c.tsn = 16'd5;
    @(negedge clk); in_valid = 1'b1; in_cqe = c; @(negedge clk); in_valid = 1'b0;
    repeat (2) @(posedge clk);
    chk(outs.size() == 1 && outs[0] == c, "forwarded");
    chk(cns.size() == 1 && cns[0] == c, "notified once");
    out_ready = 1'b0;
    @(negedge clk); in_valid = 1'b1; c.tsn = 16'd6; in_cqe = c; @(negedge clk); in_valid = 1'b0;
    repeat (3) @(posedge clk);
    chk(cns.size() == 1, "no notification while stalled");
    out_ready = 1'b1; repeat (2) @(posedge clk);
    chk(cns.size() == 2 && outs.size() == 2 && cns[1].tsn == 16'd6, "notified on hand-off");
    finish_tb();
  end
endmodule
