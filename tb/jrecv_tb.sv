// jrecv_tb: self-checking testbench of jrecv.
//
// Checks SEND delivery into a per-Jetty receive queue, FIFO pops, the no-receive-buffer status when full and the depth query.
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
module jrecv_tb;
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
  logic pop_valid = 1'b0, pop_ok; jetty_id_t pop_jetty = '0, pop_src; logic [63:0] pop_data; jetty_id_t [7:0] dq_jetty = '0; logic [7:0] dq_depth [8]; logic [15:0] norq_cnt;
  jrecv #(.NUM_JETTY(8)) dut (.*);

  initial begin
    pkt_t p;
    reset_dut();
    for (int k = 0; k < 5; k++) begin p = base_pkt(OP_SEND); p.dst_jetty = 10'd2; p.data = 64'(k); send(p); end
    expect_n(5);
    for (int k = 0; k < 4; k++) chk(got[k].status == ST_OK, "delivered");
    chk(got[4].status == ST_NO_RQ && norq_cnt == 16'd1, "fifth finds no buffer");
    dq_jetty[0] = 10'd2; dq_jetty[1] = 10'd3; #1 chk(dq_depth[0] == 8'd4 && dq_depth[1] == 8'd0, "depth query");
    @(negedge clk); pop_valid = 1'b1; pop_jetty = 10'd2;
    @(negedge clk); chk(pop_ok && pop_data == 64'd0 && pop_src == 10'd3, "first pop");
    @(negedge clk); pop_valid = 1'b0; chk(pop_ok && pop_data == 64'd1, "second pop in order");
    @(negedge clk); chk(!pop_ok && dq_depth[0] == 8'd2, "depth after pops");
    pop_valid = 1'b1; pop_jetty = 10'd3; @(negedge clk); pop_valid = 1'b0; chk(!pop_ok, "empty queue");
    finish_tb();
  end
endmodule
