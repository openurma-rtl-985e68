// rtph_p_tb: self-checking testbench of rtph_p.
//
// Checks data packets to the data port, ACK/SACK turned into events, and fused acks forwarded as TAACK.
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
module rtph_p_tb;
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
  logic data_valid, data_ready = 1'b1, fused_valid, fused_ready = 1'b1, ack_valid; pkt_t data_pkt, fused_pkt; ack_evt_t ack_evt;
  assign out_valid = 1'b0; assign out_pkt = '0;
  rtph_p dut (.clk, .rst_n, .in_valid, .in_ready, .in_pkt, .data_valid, .data_ready, .data_pkt, .fused_valid, .fused_ready, .fused_pkt, .ack_valid, .ack_evt);

  initial begin
    pkt_t p;
    reset_dut();
    p = base_pkt(OP_WRITE); send(p);
    chk(data_valid && data_pkt == p && !ack_valid, "data routed");
    p = '0; p.rtp_op = RTP_SACK; p.dst_tpn = 10'd6; p.ack_psn = 24'd9; p.sack = 64'h5; p.ece = 1'b1; p.fused = 1'b1; p.tsn = 16'd3;
    send(p);

    chk(ack_valid && ack_evt.tpc == 10'd6 && ack_evt.ack_psn == 24'd9 && ack_evt.is_sack && ack_evt.sack == 64'h5 && ack_evt.ece, "ack event");
    chk(fused_valid && fused_pkt.op == OP_TAACK && fused_pkt.tsn == 16'd3 && !data_valid, "fused ack");
    finish_tb();
  end
endmodule
