// tpack_tb: self-checking testbench of tpack.
//
// Checks ACK and SACK packets addressed back to the sender's channel, congestion echo and the fused transaction ack.
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
module tpack_tb;
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
  ackreq_t in_req = '0; logic [15:0] sack_cnt;
  task automatic sendr(ackreq_t r);
    @(negedge clk); in_valid = 1'b1; in_req = r;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 1'b0;
  endtask
  tpack dut (.clk, .rst_n, .in_valid, .in_ready, .in_req, .out_valid, .out_ready, .out_pkt, .sack_cnt);

  initial begin
    ackreq_t r;
    reset_dut();
    r = '0; r.hdr = base_pkt(OP_WRITE); r.hdr.src_tpn = 10'd8; r.tpc = 10'd2; r.ack_psn = 24'd4; r.ece = 1'b1;
    sendr(r); expect_n(1);
    chk(got[0].rtp_op == RTP_ACK && got[0].dst_cna == 16'd1 && got[0].dst_tpn == 10'd8 && got[0].src_tpn == 10'd2, "ACK addressing");
    chk(got[0].ack_psn == 24'd4 && got[0].ece && got[0].op == OP_NOP, "ACK content");
    r.sack = 64'h6; r.fused = 1'b1; sendr(r); expect_n(2);
    chk(got[1].rtp_op == RTP_SACK && got[1].sack == 64'h6, "SACK");
    chk(got[1].op == OP_TAACK && got[1].fused && got[1].dst_jetty == 10'd3 && got[1].tsn == 16'd7, "fused TAACK");
    chk(sack_cnt == 16'd1, "sack count");
    finish_tb();
  end
endmodule
