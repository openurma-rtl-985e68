// jg_dispatch_tb: self-checking testbench of jg_dispatch.
//
// Checks Jetty Group member selection under the hash, round-robin and least-depth policies, and that non-group traffic passes unchanged.
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
module jg_dispatch_tb;
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
  logic cfg_valid = 1'b0, cfg_en = 1'b0; logic [3:0] cfg_idx = '0, cfg_nmem = '0; jetty_id_t cfg_gid = '0; logic [1:0] cfg_policy = '0;
  jetty_id_t [7:0] cfg_mem = '0, dq_jetty; logic [7:0] dq_depth [8]; logic [7:0] depth [8] = '{default: 8'd0}; logic [15:0] hit_cnt; logic [2:0] last_pick;
  always_comb for (int k = 0; k < 8; k++) dq_depth[k] = depth[k];
  task automatic cfg(int i, jetty_id_t gid, logic [1:0] pol, logic [3:0] n, jetty_id_t [7:0] mem);
    @(negedge clk); cfg_valid = 1'b1; cfg_idx = 4'(i); cfg_en = 1'b1; cfg_gid = gid; cfg_policy = pol; cfg_nmem = n; cfg_mem = mem;
    @(negedge clk); cfg_valid = 1'b0;
  endtask
  jg_dispatch dut (.*);

  initial begin
    pkt_t p;
    jetty_id_t [7:0] m;
    reset_dut();
    for (int k = 0; k < 8; k++) m[k] = 10'(20 + k);
    cfg(0, 10'd100, 2'd1, 4'd4, m);
    cfg(1, 10'd101, 2'd0, 4'd8, m);
    cfg(2, 10'd102, 2'd2, 4'd3, m);
    p = base_pkt(OP_SEND); p.dst_jetty = 10'd100;
    for (int k = 0; k < 5; k++) send(p);
    expect_n(5);
    chk(got_t[0] - t_in <= 5, "registered stage");
    for (int k = 0; k < 5; k++) chk(got[k].dst_jetty == 10'(20 + (k % 4)), "round robin member");
    p.dst_jetty = 10'd101; p.jg_key = 16'd13; send(p); expect_n(6);
    chk(got[5].dst_jetty == 10'd25, "hash member = key mod 8");
    depth[0] = 8'd3; depth[1] = 8'd0; depth[2] = 8'd2;
    p.dst_jetty = 10'd102; send(p); expect_n(7);
    chk(got[6].dst_jetty == 10'd21, "least-depth member");
    p.dst_jetty = 10'd7; send(p); p.dst_jetty = 10'd100; p.op = OP_WRITE; send(p); expect_n(9);
    chk(got[7].dst_jetty == 10'd7 && got[8].dst_jetty == 10'd100, "non-group and non-SEND unchanged");
    chk(hit_cnt == 16'd7, "hit count");
    finish_tb();
  end
endmodule
