// btah_b_tb: self-checking testbench of btah_b.
//
// Checks that a scheduled work request becomes a request packet with the transaction header filled, in one cycle.
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
module btah_b_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  function automatic wqe_t base_wqe(opcode_e op, int j);
    wqe_t w;
    w = '0; w.op = op; w.jetty = 10'(j); w.dst_cna = 16'd2; w.dst_jetty = 10'd5; w.sm = SM_ROL; w.addr = 32'h80; w.data = 64'h55; w.len = 16'd8;
    return w;
  endfunction
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1; wr_t in_wr = '0; pkt_t out_pkt;
  pkt_t got [$]; int got_t [$];
  always @(posedge clk) if (out_valid && out_ready) begin got.push_back(out_pkt); got_t.push_back(cyc); end
  btah_b dut (.*);

  initial begin
    wr_t r;
    int t0;
    reset_dut();
    r = '0; r.w = base_wqe(OP_ATOMIC, 3); r.w.aop = AT_CAS; r.w.cmp = 64'h77; r.w.eo = EO_SO; r.w.comp_ord = 1'b1; r.tsn = 16'd9;
    @(negedge clk); in_valid = 1'b1; in_wr = r;
    @(posedge clk); t0 = cyc; #1 in_valid = 1'b0;
    @(posedge clk); #1 chk(got.size() == 1 && got_t[0] - t0 == 1, "1-cycle latency");
    chk(got[0].op == OP_ATOMIC && got[0].aop == AT_CAS && got[0].tsn == 16'd9 && got[0].src_jetty == 10'd3 && got[0].dst_jetty == 10'd5, "header");
    chk(got[0].dst_cna == 16'd2 && got[0].data == 64'h55 && got[0].cmp == 64'h77 && got[0].eo == EO_SO && got[0].comp_ord, "operands");
    finish_tb();
  end
endmodule
