// hbm_rd_tb: self-checking testbench of hbm_rd.
//
// Checks READ and LOAD returning memory data, the MR check request, the fault response and that LOAD skips the check.
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
module hbm_rd_tb;
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
  logic chk_ok, ok = 1'b1; mr_key_t chk_key; logic [31:0] chk_addr, chk_token; logic [15:0] chk_len; logic [2:0] chk_kind;
  logic mem_req, mem_rvalid = 1'b0, mem_gnt = 1'b1; logic [12:0] mem_addr; logic [63:0] mem_rdata = '0; logic [15:0] fault_cnt;
  logic [63:0] mem [64];
  assign chk_ok = ok;
  always @(posedge clk) begin
    mem_rvalid <= mem_req && mem_gnt;
    if (mem_req && mem_gnt) mem_rdata <= mem[mem_addr[5:0]];
  end
  hbm_rd dut (.*);

  initial begin
    pkt_t p;
    reset_dut();
    mem[8] = 64'h1122334455667788;
    p = base_pkt(OP_READ); p.addr = 32'h40; send(p);
    #1 chk(chk_kind == 3'b001 && chk_addr == 32'h40 && chk_len == 16'd8, "read permission asked");
    expect_n(1);
    chk(got[0].data == 64'h1122334455667788 && got[0].status == ST_OK, "READ data");
    ok = 1'b0; send(p); expect_n(2);
    chk(got[1].status == ST_MR_FAULT && got[1].data == 0 && fault_cnt == 16'd1, "READ fault");
    p.op = OP_LOAD; send(p); expect_n(3);
    chk(got[2].status == ST_OK && got[2].data == 64'h1122334455667788, "LOAD skips MR check");
    finish_tb();
  end
endmodule
