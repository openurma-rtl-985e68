// tpc_tx_tb: self-checking testbench of tpc_tx.
//
// Checks channel selection by destination node, per-channel PSN numbering, bypass pass-through, the no-channel drop and the 1-cycle latency.
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
module tpc_tx_tb;
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
  tpc_id_t tp_idx; tpc_cfg_t tp_cfg; logic [15:0] nochan_cnt;
  always_comb begin tp_cfg = '0; tp_cfg.remote_cna = 16'(tp_idx); tp_cfg.valid = (tp_idx != 10'd9); end
  tpc_tx #(.NUM_TPC(16)) dut (.*);

  initial begin
    pkt_t p;
    reset_dut();
    p = base_pkt(OP_WRITE); p.dst_cna = 16'd3; send(p);
    expect_n(1); chk(got_t[0] - t_in == 1, "1-cycle latency");
    chk(got[0].src_tpn == 10'd3 && got[0].psn == 24'd0 && got[0].rtp_op == RTP_DATA, "channel and PSN");
    send(p); p.dst_cna = 16'd5; send(p); p.dst_cna = 16'd3; send(p);
    expect_n(4);
    chk(got[1].psn == 24'd1 && got[2].psn == 24'd0 && got[2].src_tpn == 10'd5 && got[3].psn == 24'd2, "independent PSN per channel");
    p.dst_cna = 16'd9; send(p);
    p.tp_type = TP_UTP; p.psn = 24'd77; send(p);
    expect_n(5); repeat (2) @(posedge clk);
    chk(got.size() == 5 && got[4].tp_type == TP_UTP && got[4].psn == 24'd77, "bypass untouched");
    chk(nochan_cnt == 16'd1, "no-channel counted");
    finish_tb();
  end
endmodule
