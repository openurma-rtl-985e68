// jsched_tb: self-checking testbench of jsched.
//
// Checks the 5-cycle scheduling latency, per-Jetty TSN numbering, round-robin service of two Jetties, the fence gate and dropping of requests for invalid Jetties.
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
module jsched_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  function automatic wqe_t base_wqe(opcode_e op, int j);
    wqe_t w;
    w = '0; w.op = op; w.jetty = 10'(j); w.dst_cna = 16'd2; w.dst_jetty = 10'd5; w.sm = SM_ROL; w.addr = 32'h80; w.data = 64'h55; w.len = 16'd8;
    return w;
  endfunction
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1, cn_valid = 1'b0, inval = 1'b0;
  wqe_t in_wqe = '0; wr_t out_wr; jetty_id_t jt_idx, cn_jetty = '0; jetty_rec_t jt_rec; logic [15:0] drop_cnt, fence_wait_cnt;
  wr_t outs [$];
  always_comb begin jt_rec = '0; jt_rec.valid = inval ? 8'd0 : 8'd1; end
  int ot [$];
  always @(posedge clk) if (out_valid && out_ready) begin outs.push_back(out_wr); ot.push_back(cyc); end
  jsched #(.NUM_JETTY(8)) dut (.*);

  initial begin
    wr_t r [$];
    int t0;
    reset_dut();
    @(negedge clk); in_valid = 1'b1; in_wqe = base_wqe(OP_WRITE, 2);
    @(posedge clk); t0 = cyc; #1 in_valid = 1'b0;
    while (outs.size() == 0) @(posedge clk);
    chk(ot[0] - t0 == 5, $sformatf("5-cycle latency, got %0d", ot[0] - t0));
    repeat (3) @(posedge clk);
    // two Jetties with two requests each: round-robin alternates them
    for (int k = 0; k < 2; k++) begin
      @(negedge clk); in_valid = 1'b1; in_wqe = base_wqe(OP_WRITE, 1);
      @(negedge clk); in_wqe = base_wqe(OP_WRITE, 6);
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (40) @(posedge clk);
    chk(outs.size() == 5, "all scheduled");
    chk(outs[1].w.jetty != outs[2].w.jetty && outs[2].w.jetty != outs[3].w.jetty, "round-robin alternation");
    chk(outs[0].tsn == 0 && ((outs[1].w.jetty == 10'd1) ? outs[3].tsn : outs[4].tsn) == 16'd1, "per-Jetty TSN");
    // fence: Jetty 2 has one outstanding (the first request); a fenced request waits for its completion
    @(negedge clk); in_valid = 1'b1; in_wqe = base_wqe(OP_WRITE, 2); in_wqe.fence = 1'b1;
    @(negedge clk); in_valid = 1'b0;
    repeat (20) @(posedge clk);
    chk(outs.size() == 5 && fence_wait_cnt != 0, "fenced request held");
    @(negedge clk); cn_valid = 1'b1; cn_jetty = 10'd2; @(negedge clk); cn_valid = 1'b0;
    repeat (20) @(posedge clk);
    chk(outs.size() == 6 && outs[5].w.fence, "fenced request released after completion");
    // invalid Jetty record: dropped
    inval = 1'b1;
    @(negedge clk); in_valid = 1'b1; in_wqe = base_wqe(OP_WRITE, 4);
    @(negedge clk); in_valid = 1'b0;
    repeat (20) @(posedge clk);
    chk(drop_cnt == 16'd1 && outs.size() == 6, "invalid Jetty dropped");
    finish_tb();
  end
endmodule
