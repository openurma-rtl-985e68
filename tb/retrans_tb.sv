// retrans_tb: self-checking testbench of retrans.
//
// Checks the 1-cycle pass of new data, ACK pass-through, selective replay of only the missing PSN on a SACK, go-back-N replay of every unacknowledged PSN, replay on timeout and the timer start event.
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
module retrans_tb;
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
  logic ack_in_valid = 1'b0, ack_in_ready, ack_valid = 1'b0, mode = 1'b1, mode_sel, rto_valid = 1'b0, rto_ready, tmr_valid, tmr_busy;
  pkt_t ack_in_pkt = '0; ack_evt_t ack_evt = '0; tpc_id_t mode_idx, rto_tpc = '0, tmr_tpc; logic [15:0] replay_cnt;
  int tmrs = 0;
  assign mode_sel = mode;
  always @(posedge clk) if (tmr_valid && tmr_busy) tmrs++;
  retrans #(.NUM_TPC(4)) dut (.*);

  initial begin
    pkt_t p;
    ack_evt_t a;
    reset_dut();
    p = base_pkt(OP_WRITE); p.src_tpn = 10'd1;
    p.psn = 0; send(p); expect_n(1); chk(got_t[0] - t_in == 1, "1-cycle latency");
    chk(tmrs == 1, "timer started for idle channel");
    for (int k = 1; k < 6; k++) begin p.psn = 24'(k); send(p); end
    expect_n(6);
    // SACK: PSN 0 acked, PSN 2 received, PSN 1 missing
    mode = 1'b1;
    a = '0; a.tpc = 10'd1; a.ack_psn = 24'd0; a.is_sack = 1'b1; a.sack = 64'b10;
    @(negedge clk); ack_valid = 1'b1; ack_evt = a; @(negedge clk); ack_valid = 1'b0;
    repeat (10) @(posedge clk);
    chk(got.size() == 7 && got[6].psn == 24'd1, "selective: only PSN 1 replayed");
    mode = 1'b0;
    @(negedge clk); ack_valid = 1'b1; ack_evt = a; @(negedge clk); ack_valid = 1'b0;
    repeat (12) @(posedge clk);
    chk(got.size() == 12, "go-back-N: PSN 1..5 replayed");
    for (int k = 0; k < 5; k++) chk(got[7 + k].psn == 24'(k + 1), "go-back-N order");
    mode = 1'b1;
    @(negedge clk); rto_valid = 1'b1; rto_tpc = 10'd1; @(negedge clk); rto_valid = 1'b0;
    repeat (6) @(posedge clk);
    chk(got.size() == 13 && got[12].psn == 24'd1, "timeout replays the oldest");
    @(negedge clk); ack_in_valid = 1'b1; ack_in_pkt = base_pkt(OP_NOP); ack_in_pkt.rtp_op = RTP_ACK; @(negedge clk); ack_in_valid = 1'b0;
    repeat (2) @(posedge clk);
    chk(got.size() == 14 && got[13].rtp_op == RTP_ACK, "local ACK passes");
    chk(replay_cnt == 16'd7, "replay count");
    finish_tb();
  end
endmodule
