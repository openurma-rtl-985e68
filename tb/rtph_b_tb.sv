// rtph_b_tb: self-checking testbench of rtph_b.
//
// Checks destination TPN from the TP table, ack request and congestion hint on reliable data; ACK packets unchanged; 1-cycle latency.
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
module rtph_b_tb;
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
  tpc_id_t tp_idx; tpc_cfg_t tp_cfg; logic [31:0] win;
  assign tp_cfg = '{remote_cna: 16'd2, local_tpn: 10'd5, remote_tpn: 10'd77, selective: 1'b1, valid: 1'b1};
  assign win = 32'h1000;
  rtph_b dut (.*);

  initial begin
    pkt_t p;
    reset_dut();
    p = base_pkt(OP_WRITE); p.src_tpn = 10'd5; p.fecn = 1'b1;
    send(p); expect_n(1);
    chk(got_t[0] - t_in == 1, "1-cycle latency");
    chk(tp_idx == 10'd5, "table indexed by source TPN");
    chk(got[0].dst_tpn == 10'd77 && got[0].ack_req && !got[0].fecn, "reliable header filled");
    chk(got[0].cc_hint == 8'h10, "window hint");
    p.rtp_op = RTP_ACK; p.dst_tpn = 10'd9; send(p); expect_n(2);
    chk(got[1].dst_tpn == 10'd9 && !got[1].ack_req, "ACK untouched");
    finish_tb();
  end
endmodule
