// tpc_rx_tb: self-checking testbench of tpc_rx.
//
// Checks in-order delivery with a cumulative ACK, buffering of an early PSN with a SACK, drain of the buffered packet when the gap fills, duplicate handling, congestion echo and the fused ack flag.
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
module tpc_rx_tb;
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
  logic ack_valid, ack_ready = 1'b1; ackreq_t ack_req; logic [15:0] ooo_cnt, dup_cnt;
  logic ro_ins_valid, ro_ins_ok, ro_lk_valid, ro_lk_hit, ce_mark_valid, ce_fecn, ce_ece, ce_clr_valid;
  tpc_id_t ro_ins_tpc, ro_lk_tpc, ce_tpc; pkt_t ro_ins_pkt, ro_lk_pkt; psn_t ro_lk_psn; logic [7:0] occ; logic [15:0] mk;
  ackreq_t acks [$];
  always @(posedge clk) if (ack_valid && ack_ready) acks.push_back(ack_req);
  tpc_rx #(.NUM_TPC(4)) dut (.*);
  reorder #(.SLOTS(8)) u_ro (.clk, .rst_n, .ins_valid(ro_ins_valid), .ins_tpc(ro_ins_tpc), .ins_pkt(ro_ins_pkt), .ins_ok(ro_ins_ok),
    .lk_valid(ro_lk_valid), .lk_tpc(ro_lk_tpc), .lk_psn(ro_lk_psn), .lk_hit(ro_lk_hit), .lk_pkt(ro_lk_pkt), .occupancy(occ));
  cong_echo #(.NUM_TPC(4)) u_ce (.clk, .rst_n, .mark_valid(ce_mark_valid), .mark_tpc(ce_tpc), .mark_fecn(ce_fecn), .q_tpc(ce_tpc), .q_ece(ce_ece),
    .clr_valid(ce_clr_valid), .clr_tpc(ce_tpc), .mark_cnt(mk));

  initial begin
    pkt_t p;
    reset_dut();
    p = base_pkt(OP_WRITE); p.sm = SM_ROL; p.dst_tpn = 10'd1;
    p.psn = 0; send(p); expect_n(1);
    chk(acks.size() == 1 && acks[0].ack_psn == 0 && acks[0].fused && acks[0].tpc == 10'd1, "in-order ACK, fused");
    p.psn = 2; p.fecn = 1'b1; send(p); repeat (2) @(posedge clk);
    chk(got.size() == 1 && ooo_cnt == 16'd1, "early PSN held");
    chk(acks.size() == 2 && acks[1].ack_psn == 0 && acks[1].sack == 64'b10 && acks[1].ece, "SACK with echo");
    p.psn = 1; p.fecn = 1'b0; send(p); repeat (4) @(posedge clk);
    chk(got.size() == 3 && got[1].psn == 24'd1 && got[2].psn == 24'd2, "gap filled, held packet drained");
    chk(acks[acks.size()-1].ack_psn == 24'd2, "cumulative ACK advanced");
    p.psn = 1; send(p); repeat (2) @(posedge clk);
    chk(got.size() == 3 && dup_cnt == 16'd1, "duplicate dropped and re-acked");
    finish_tb();
  end
endmodule
