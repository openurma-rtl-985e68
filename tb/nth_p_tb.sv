// nth_p_tb: self-checking testbench of nth_p.
//
// Checks routing of reliable and bypass packets addressed to this node and dropping of misrouted frames.
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
module nth_p_tb;
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
  cna_t local_cna = 16'd2; logic rtp_valid, utp_valid, rtp_ready = 1'b1, utp_ready = 1'b1; logic [15:0] misroute_cnt;
  assign out_valid = rtp_valid | utp_valid;
  nth_p dut (.clk, .rst_n, .local_cna, .in_valid, .in_ready, .in_pkt, .rtp_valid, .rtp_ready, .utp_valid, .utp_ready, .out_pkt, .misroute_cnt);

  initial begin
    pkt_t p;
    reset_dut();
    p = base_pkt(OP_WRITE); send(p);
    chk(rtp_valid && !utp_valid && out_pkt == p, "reliable routed");
    p.tp_type = TP_UTP; p.op = OP_LOAD; send(p);
    chk(utp_valid && !rtp_valid, "bypass routed");
    p.dst_cna = 16'd3; send(p);
    chk(!utp_valid && !rtp_valid, "misroute dropped");
    chk(misroute_cnt == 16'd1, "misroute counted");
    finish_tb();
  end
endmodule
