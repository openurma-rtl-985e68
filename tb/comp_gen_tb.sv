// comp_gen_tb: self-checking testbench of comp_gen.
//
// Checks that a response becomes a completion entry on its Jetty's completion queue in one cycle.
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
module comp_gen_tb;
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
  cqe_t outs [$]; int ot [$];
  always @(posedge clk) if (out_valid && out_ready) begin outs.push_back(out_cqe); ot.push_back(cyc); end
  cqe_t out_cqe; jetty_id_t jt_idx; jetty_rec_t jt_rec; logic [15:0] cqe_cnt;
  always_comb begin jt_rec = '0; jt_rec.jfc_id = 32'(jt_idx) * 2; end
  comp_gen dut (.clk, .rst_n, .in_valid, .in_ready, .in_pkt, .out_valid, .out_ready, .out_cqe, .jt_idx, .jt_rec, .cqe_cnt);

  initial begin
    pkt_t p;
    reset_dut();
    p = base_pkt(OP_READ_RESP); p.dst_jetty = 10'd6; p.data = 64'hBEEF; p.status = ST_MR_FAULT; p.comp_ord = 1'b1;
    send(p); while (outs.size() < 1) @(posedge clk);
    chk(ot[0] - t_in == 1, "1-cycle latency");
    chk(outs[0].jfc == 8'd12 && outs[0].jetty == 10'd6 && outs[0].tsn == 16'd7, "queue, Jetty, TSN");
    chk(outs[0].data == 64'hBEEF && outs[0].status == ST_MR_FAULT && outs[0].comp_ord && outs[0].op == OP_READ_RESP, "fields");
    chk(cqe_cnt == 16'd1, "count");
    finish_tb();
  end
endmodule
