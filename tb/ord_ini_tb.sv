// ord_ini_tb: self-checking testbench of ord_ini.
//
// Checks the 1-cycle unblocked path, parking of a strong-order ROI request while an earlier ordered request of its Jetty is outstanding, and its release on completion.
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
module ord_ini_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  function automatic wqe_t base_wqe(opcode_e op, int j);
    wqe_t w;
    w = '0; w.op = op; w.jetty = 10'(j); w.dst_cna = 16'd2; w.dst_jetty = 10'd5; w.sm = SM_ROL; w.addr = 32'h80; w.data = 64'h55; w.len = 16'd8;
    return w;
  endfunction
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1, cn_valid = 1'b0; wr_t in_wr = '0, out_wr; cqe_t cn_cqe = '0; logic [15:0] park_cnt;
  wr_t outs [$];
  int ot [$];
  always @(posedge clk) if (out_valid && out_ready) begin outs.push_back(out_wr); ot.push_back(cyc); end
  ord_ini #(.NUM_JETTY(8)) dut (.*);

  initial begin
    wr_t r;
    int t0;
    reset_dut();
    r = '0; r.w = base_wqe(OP_WRITE, 1); r.w.sm = SM_ROI; r.w.eo = EO_RO;
    @(negedge clk); in_valid = 1'b1; in_wr = r;
    @(posedge clk); t0 = cyc; #1 in_valid = 1'b0;
    repeat (2) @(posedge clk); chk(outs.size() == 1 && ot[0] - t0 == 1, "1-cycle unblocked path");
    r.w.eo = EO_SO; r.tsn = 16'd1;
    @(negedge clk); in_valid = 1'b1; in_wr = r;
    @(negedge clk); in_valid = 1'b0;
    r.w = base_wqe(OP_WRITE, 2); r.w.sm = SM_ROI; r.w.eo = EO_SO;
    @(negedge clk); in_valid = 1'b1; in_wr = r;
    @(negedge clk); in_valid = 1'b0;
    repeat (5) @(posedge clk);
    chk(park_cnt == 16'd1, "SO request parked");
    chk(outs.size() == 2 && outs[1].w.jetty == 10'd2, "other Jetty not blocked");
    @(negedge clk); cn_valid = 1'b1; cn_cqe = '0; cn_cqe.jetty = 10'd1; cn_cqe.sm = SM_ROI; cn_cqe.eo = EO_RO;
    @(negedge clk); cn_valid = 1'b0;
    repeat (3) @(posedge clk);
    chk(outs.size() == 3 && outs[2].w.jetty == 10'd1 && outs[2].tsn == 16'd1, "released after completion");
    finish_tb();
  end
endmodule
