// ord_tgt_tb: self-checking testbench of ord_tgt.
//
// Checks ROT strong-order gating at the target: a strong-order request is parked while an earlier ordered request of the same initiator Jetty is executing, other sources pass, and it is released on the execution-done event.
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
module ord_tgt_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  pkt_t in_pkt = '0, out_pkt;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  pkt_t got [$];
  int   got_t [$];
  int   t_in;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin got.push_back(out_pkt); got_t.push_back(cyc); end
  task automatic send(pkt_t p);
    @(negedge clk); in_valid = 1'b1; in_pkt = p;
    do @(posedge clk); while (!in_ready);
    t_in = cyc;
    #1 in_valid = 1'b0;
  endtask
  task automatic expect_n(int n);
    int g = 0;
    while (got.size() < n && g < 2000) begin @(posedge clk); g++; end
    chk(got.size() >= n, $sformatf("expected %0d outputs, got %0d", n, got.size()));
  endtask
  function automatic pkt_t base_pkt(opcode_e op);
    pkt_t p;
    p = '0; p.op = op; p.src_cna = 16'd1; p.dst_cna = 16'd2; p.src_jetty = 10'd3; p.dst_jetty = 10'd4;
    p.tsn = 16'd7; p.mr_key = 6'd1; p.addr = 32'h40; p.token = 32'h99; p.data = 64'h1234; p.len = 16'd8;
    return p;
  endfunction
  logic done_valid = 1'b0; pkt_t done_pkt = '0; logic [15:0] park_cnt;
  ord_tgt #(.KEYS(16)) dut (.*);

  initial begin
    pkt_t p, q, r;
    reset_dut();
    p = base_pkt(OP_WRITE); p.sm = SM_ROT; p.eo = EO_RO;
    send(p); expect_n(1); chk(got_t[0] - t_in == 1, "1-cycle unblocked path");
    q = p; q.eo = EO_SO; q.tsn = 16'd8; send(q);
    r = p; r.src_jetty = 10'd6; r.eo = EO_SO; send(r);
    repeat (4) @(posedge clk);
    chk(park_cnt == 16'd1, "SO request parked behind executing RO");
    chk(got.size() == 2 && got[1].src_jetty == 10'd6, "other source not blocked");
    @(negedge clk); done_valid = 1'b1; done_pkt = p;
    @(negedge clk); done_valid = 1'b0;
    expect_n(3);
    chk(got[2].tsn == 16'd8, "released after execution done");
    q = p; q.sm = SM_ROI; q.eo = EO_SO; send(q); expect_n(4);
    chk(park_cnt == 16'd1, "non-ROT request not gated");
    finish_tb();
  end
endmodule
