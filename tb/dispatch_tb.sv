// dispatch_tb: self-checking testbench of dispatch.
//
// Checks every opcode class reaches its output and an unknown opcode is dropped.
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
module dispatch_tb;
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
  logic [5:0] dout_valid, dout_ready = 6'h3F; pkt_t dout_pkt; logic [15:0] bad_cnt;
  assign out_valid = 1'b0; assign out_pkt = '0;
  dispatch dut (.clk, .rst_n, .in_valid, .in_ready, .in_pkt, .out_valid(dout_valid), .out_ready(dout_ready), .out_pkt(dout_pkt), .bad_cnt);

  initial begin
    opcode_e ops [12] = '{OP_READ, OP_LOAD, OP_WRITE, OP_STORE, OP_ATOMIC, OP_SEND, OP_READ_RESP, OP_TAACK, OP_ATOMIC_RESP, OP_LOAD_RESP, OP_STORE_ACK, OP_NOP};
    int      exp [12] = '{0, 0, 1, 1, 2, 3, 4, 4, 4, 5, 5, -1};
    reset_dut();
    for (int k = 0; k < 12; k++) begin
      in_pkt = base_pkt(ops[k]); in_valid = 1'b1;
      #1;
      if (exp[k] < 0) chk(dout_valid == 6'd0 && in_ready, "NOP dropped");
      else chk(dout_valid == 6'(1 << exp[k]) && dout_pkt == in_pkt, $sformatf("opcode %0d to port %0d", ops[k], exp[k]));
      @(posedge clk);
    end
    in_valid = 1'b0;
    dout_ready = 6'b111110; in_pkt = base_pkt(OP_READ); in_valid = 1'b1; #1 chk(!in_ready, "back-pressure from target"); in_valid = 1'b0;
    chk(bad_cnt == 16'd1, "bad count");
    finish_tb();
  end
endmodule
