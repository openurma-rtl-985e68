// cwnd_tb: self-checking testbench of cwnd.
//
// Checks the 1-cycle pass, the stall when the in-flight window is full, the multiplicative decrease to the 4096-byte floor on echoed congestion and the additive increase on clean ACKs.
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
module cwnd_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 40000;
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
  logic ack_valid = 1'b0; ack_evt_t ack_evt = '0; logic [15:0] stall_cnt, md_cnt; logic [31:0] win_probe;
  cwnd #(.NUM_TPC(4)) dut (.*);

  initial begin
    pkt_t p;
    reset_dut();
    p = base_pkt(OP_WRITE); p.src_tpn = 10'd0;
    p.psn = 0; send(p); expect_n(1); chk(got_t[0] - t_in == 1, "1-cycle latency");
    chk(win_probe == 32'd65536, "initial window 65536");
    for (int k = 1; k < 64; k++) begin p.psn = 24'(k); send(p); end
    expect_n(64);
    // the 64-slot ring is full: the 65th packet stalls
    @(negedge clk); in_valid = 1'b1; p.psn = 24'd64; in_pkt = p;
    repeat (4) @(posedge clk);
    chk(got.size() == 64 && stall_cnt != 0, "stalled at 64 in flight");
    @(negedge clk); ack_valid = 1'b1; ack_evt = '0; ack_evt.ack_psn = 24'd9;
    @(negedge clk); ack_valid = 1'b0;
    repeat (3) @(posedge clk); in_valid = 1'b0;
    chk(got.size() == 65, "released by ACK");
    chk(win_probe == 32'd65536, "additive increase capped at the initial window");
    for (int k = 0; k < 5; k++) begin
      @(negedge clk); ack_valid = 1'b1; ack_evt = '0; ack_evt.ack_psn = 24'(10 + k); ack_evt.ece = 1'b1;
    end
    @(negedge clk); ack_valid = 1'b0;
    chk(md_cnt == 16'd5 && win_probe == 32'd4096, "AIMD halves down to the 4096 floor");
    @(negedge clk); ack_valid = 1'b1; ack_evt = '0; ack_evt.ack_psn = 24'd20;
    @(negedge clk); ack_valid = 1'b0;
    chk(win_probe == 32'd4352, "additive increase");
    finish_tb();
  end
endmodule
