// urma_nic_full_tb: full-size end-to-end testbench of the NIC pipeline.
//
// Two NICs at their default sizes (1024 Jetties, 1024 TP Channels, 64-slot
// retransmit ring, 64 KB on-NIC memory, 65,536 B initial window) wired back
// to back, transmit to receive, with no parameter overrides. Checks the
// 24-cycle cold path of a WRITE, WRITE/READ data integrity through the
// reliable transport, an atomic fetch-and-add, and a load/store bypass
// STORE then LOAD with its 8-cycle first-word latency.
`timescale 1ns/1ps
module urma_nic_full_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"

  logic        jt_en [2], tp_en [2], mr_en [2], dbv [2], dbr [2], pv [2], pok [2];
  logic [9:0]  jt_idx [2], tp_idx [2];
  jetty_rec_t  jt_rec [2];
  tpc_cfg_t    tp_cfg [2];
  mr_rec_t     mr_rec [2];
  wqe_t        dbw [2];
  logic [$bits(cqe_t)-1:0] pcqe [2];
  logic        lsv [2], lsr [2], lswe [2], lsrv [2];
  logic [31:0] lsa [2];
  logic [63:0] lsd [2], lsrd [2];
  logic [3:0]  lsst [2];
  logic        txv [2], txl [2];
  logic [63:0] txd [2];
  logic [31:0] sv [2];

  for (genvar n = 0; n < 2; n++) begin : g
    logic       rq_ok;
    logic [63:0] rq_d;
    logic [7:0]  c0, c1;
    urma_nic u (
      .clk, .rst_n, .local_cna(16'(n + 1)),
      .jt_wr_en(jt_en[n]), .jt_wr_idx(jt_idx[n]), .jt_wr_rec(jt_rec[n]),
      .tp_wr_en(tp_en[n]), .tp_wr_idx(tp_idx[n]), .tp_wr_cfg(tp_cfg[n]),
      .mr_wr_en(mr_en[n]), .mr_wr_key(6'd1), .mr_wr_rec(mr_rec[n]),
      .jg_cfg_valid(1'b0), .jg_cfg_idx('0), .jg_cfg_en(1'b0), .jg_cfg_gid('0), .jg_cfg_policy('0),
      .jg_cfg_nmem('0), .jg_cfg_mem('0),
      .db_valid(dbv[n]), .db_ready(dbr[n]), .db_wqe(dbw[n]),
      .poll_valid(1'b1), .poll_jfc(8'd0), .poll_ok(pok[n]), .poll_cqe(pcqe[n]),
      .rq_pop_valid(1'b0), .rq_pop_jetty('0), .rq_pop_ok(rq_ok), .rq_pop_data(rq_d),
      .ls_req_valid(lsv[n]), .ls_req_ready(lsr[n]), .ls_req_we(lswe[n]), .ls_req_addr(lsa[n]),
      .ls_req_wdata(lsd[n]), .ls_req_ctx(c0), .ls_resp_valid(lsrv[n]), .ls_resp_data(lsrd[n]),
      .ls_resp_status(lsst[n]), .ls_resp_ctx(c1),
      .tx_valid(txv[n]), .tx_ready(1'b1), .tx_data(txd[n]), .tx_last(txl[n]),
      .rx_valid(txv[1-n]), .rx_data(txd[1-n]), .rx_last(txl[1-n]),
      .stat_sel(6'd20), .stat_val(sv[n]));
  end

  cqe_t cq [$];
  always @(posedge clk) if (pok[0]) cq.push_back(cqe_t'(pcqe[0]));
  logic got; logic [63:0] gd;
  always @(posedge clk) if (lsrv[0]) begin got <= 1'b1; gd <= lsrd[0]; end

  int t0, lat;
  task automatic post(wqe_t w);
    @(negedge clk); dbv[0] = 1; dbw[0] = w;
    do @(posedge clk); while (!dbr[0]);
    t0 = cyc;
    #1 dbv[0] = 0;
  endtask
  function automatic wqe_t mk(opcode_e op, logic [31:0] a, logic [63:0] d, atomic_op_e aop = AT_SWAP);
    wqe_t w;
    w = '0; w.op = op; w.aop = aop; w.sm = SM_ROI; w.jetty = 10'd3; w.dst_cna = 16'd2; w.dst_jetty = 10'd3;
    w.mr_key = 6'd1; w.addr = a; w.token = 32'h77; w.data = d; w.len = 16'd8;
    return w;
  endfunction
  task automatic wait_cq(int k);
    int g = 0;
    while (cq.size() < k && g < 5000) begin @(posedge clk); g++; end
    chk(cq.size() >= k, $sformatf("%0d completions expected", k));
  endtask
  task automatic ls(logic we, logic [31:0] a, logic [63:0] d);
    @(negedge clk); got = 0; lsv[0] = 1; lswe[0] = we; lsa[0] = a; lsd[0] = d;
    do @(posedge clk); while (!lsr[0]);
    t0 = cyc;
    #1 lsv[0] = 0;
    lat = -1;
    while (lat < 0) begin @(posedge clk); if (txv[0]) lat = cyc - t0; end
    while (!got) @(posedge clk);
  endtask

  initial begin
    for (int n = 0; n < 2; n++) begin
      jt_en[n] = 0; tp_en[n] = 0; mr_en[n] = 0; dbv[n] = 0; lsv[n] = 0; lswe[n] = 0; lsa[n] = 0; lsd[n] = 0;
      jt_idx[n] = 10'd3; jt_rec[n] = '{jetty_id: 3, token: 0, jfc_id: 0, jtype: 1, jstate: 1, valid: 1};
      tp_idx[n] = 10'(2 - n);
      tp_cfg[n] = '{remote_cna: 16'(2 - n), local_tpn: 10'(2 - n), remote_tpn: 10'(n + 1), selective: 1'b0, valid: 1'b1};
      mr_rec[n] = '{base: 0, len: 65536, token: 32'h77, perm_r: 1, perm_w: 1, perm_a: 1, valid: 1};
      dbw[n] = '0;
    end
    reset_dut();
    @(negedge clk);
    for (int n = 0; n < 2; n++) begin jt_en[n] = 1; tp_en[n] = 1; mr_en[n] = 1; end
    @(negedge clk);
    for (int n = 0; n < 2; n++) begin jt_en[n] = 0; tp_en[n] = 0; mr_en[n] = 0; end
    repeat (5) @(posedge clk);

    post(mk(OP_WRITE, 32'h8000, 64'h0123_4567_89AB_CDEF));
    lat = -1;
    while (lat < 0) begin @(posedge clk); if (txv[0]) lat = cyc - t0; end
    chk(lat == 24, $sformatf("cold path %0d cycles, expected 24", lat));
    wait_cq(1);
    chk(cq[0].op == OP_TAACK && cq[0].status == ST_OK && cq[0].tsn == 0, "WRITE acknowledged by TAACK");
    post(mk(OP_READ, 32'h8000, 0));
    post(mk(OP_ATOMIC, 32'h8000, 64'd1, AT_FADD));
    post(mk(OP_READ, 32'h8000, 0));
    wait_cq(4);
    chk(cq[1].data == 64'h0123_4567_89AB_CDEF, "READ data");
    chk(cq[2].op == OP_ATOMIC_RESP && cq[2].data == 64'h0123_4567_89AB_CDEF, "FAA old value");
    chk(cq[3].data == 64'h0123_4567_89AB_CDF0, "FAA result visible");
    repeat (40) @(posedge clk);
    ls(1'b1, {16'd2, 16'hFFF8}, 64'h5A5A_0000_1111_2222);
    chk(lat == 8, $sformatf("bypass first word %0d cycles, expected 8", lat));
    ls(1'b0, {16'd2, 16'hFFF8}, 64'd0);
    chk(gd == 64'h5A5A_0000_1111_2222, "LOAD returns stored data");
    chk(sv[0] == 0 && sv[1] == 0, "no FCS errors");
    finish_tb();
  end
endmodule
