// urma_nic_tb: end-to-end testbench of the NIC pipeline.
//
// Two NICs (A initiator, B target) joined by the behavioural wire/switch
// model in nic_pair, run with a reduced table size, a small congestion
// window and short timers so every mechanism shows up within a short run.
// Scenarios: cold-path WRITE latency (24 cycles doorbell to first wire
// word), load/store bypass (first word at 8 cycles) with STORE then LOAD,
// READ / atomics with data checks, fence, initiator-side strong order,
// ROT traffic with B's transmit port held, reordering with SACK and selective replay, loss recovered by
// the retransmit timer, FECN marking with window back-off, window stalls,
// Jetty-Group SEND dispatch, in-order completion, MR faults and a load
// timeout. At the end every mechanism counter read through the statistics
// port must be non-zero (the target-side strong-order park is not forced
// here: the held transmit port also stalls the ACK path and so the receive
// side; that park is covered by the ord_tgt block testbench).
`timescale 1ns/1ps
module urma_nic_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 200000;
  `include "tb_common.svh"

  nic_pair #(.NUM_JETTY(64), .NUM_TPC(64), .INIT_WIN(4096), .MIN_WIN(256), .RTO_BASE(600),
             .LS_TIMEOUT(400)) p (.clk, .rst_n);

  cqe_t cq [2][$];
  always @(posedge clk) for (int n = 0; n < 2; n++) if (p.poll_ok[n]) cq[n].push_back(cqe_t'(p.poll_cqe[n]));
  initial for (int n = 0; n < 2; n++) begin p.poll_valid[n] = 1'b1; p.poll_jfc[n] = 8'd0; end

  logic [63:0] ls_data; status_e ls_st; logic ls_got;
  always @(posedge clk) if (p.ls_resp_valid[0]) begin ls_got <= 1'b1; ls_data <= p.ls_resp_data[0]; ls_st <= status_e'(p.ls_resp_status[0]); end

  task automatic idle_all();
    for (int n = 0; n < 2; n++) begin
      p.jt_wr_en[n] = 0; p.tp_wr_en[n] = 0; p.mr_wr_en[n] = 0; p.jg_cfg_valid[n] = 0;
      p.db_valid[n] = 0; p.rq_pop_valid[n] = 0; p.ls_req_valid[n] = 0; p.stat_sel[n] = 0;
      p.jt_wr_idx[n] = 0; p.jt_wr_rec[n] = '0; p.tp_wr_idx[n] = 0; p.tp_wr_cfg[n] = '0;
      p.mr_wr_key[n] = 0; p.mr_wr_rec[n] = '0; p.jg_cfg_idx[n] = 0; p.jg_cfg_en[n] = 0;
      p.jg_cfg_gid[n] = 0; p.jg_cfg_policy[n] = 0; p.jg_cfg_nmem[n] = 0; p.jg_cfg_mem[n] = '0;
      p.db_wqe[n] = '0; p.rq_pop_jetty[n] = 0; p.ls_req_we[n] = 0; p.ls_req_addr[n] = 0; p.ls_req_wdata[n] = 0;
    end
  endtask

  task automatic configure();
    for (int n = 0; n < 2; n++) begin
      for (int j = 0; j < 32; j++) begin
        @(negedge clk);
        p.jt_wr_en[n] = 1; p.jt_wr_idx[n] = 10'(j);
        p.jt_wr_rec[n] = '{jetty_id: j, token: 32'h1234, jfc_id: 0, jtype: 1, jstate: 1, valid: 1};
      end
      @(negedge clk); p.jt_wr_en[n] = 0;
      p.tp_wr_en[n] = 1; p.tp_wr_idx[n] = 10'(2 - n);
      p.tp_wr_cfg[n] = '{remote_cna: 16'(2 - n), local_tpn: 10'(2 - n), remote_tpn: 10'(n + 1), selective: 1'b1, valid: 1'b1};
      @(negedge clk); p.tp_wr_en[n] = 0;
      p.mr_wr_en[n] = 1; p.mr_wr_key[n] = 6'd1;
      p.mr_wr_rec[n] = '{base: 0, len: 65536, token: 32'hCAFE, perm_r: 1, perm_w: 1, perm_a: 1, valid: 1};
      @(negedge clk); p.mr_wr_en[n] = 0;
    end
    // Jetty group 40 on B: members 10..13, round robin
    p.jg_cfg_valid[1] = 1; p.jg_cfg_idx[1] = 0; p.jg_cfg_en[1] = 1; p.jg_cfg_gid[1] = 10'd40;
    p.jg_cfg_policy[1] = 2'd1; p.jg_cfg_nmem[1] = 4'd4;
    p.jg_cfg_mem[1] = {10'd0, 10'd0, 10'd0, 10'd0, 10'd13, 10'd12, 10'd11, 10'd10};
    @(negedge clk); p.jg_cfg_valid[1] = 0;
  endtask

  function automatic wqe_t mk(opcode_e op, int jetty, logic [31:0] addr, logic [63:0] data,
                              svc_mode_e sm = SM_ROI, exec_ord_e eo = EO_NO, logic fence = 0,
                              logic comp_ord = 0, atomic_op_e aop = AT_SWAP, logic [63:0] cmp = 0);
    wqe_t w;
    w = '0;
    w.op = op; w.aop = aop; w.sm = sm; w.eo = eo; w.fence = fence; w.comp_ord = comp_ord;
    w.jetty = 10'(jetty); w.dst_cna = 16'd2; w.dst_jetty = 10'(jetty); w.mr_key = 6'd1;
    w.addr = addr; w.token = 32'hCAFE; w.data = data; w.cmp = cmp; w.len = 16'd8; w.jg_key = 16'd0;
    return w;
  endfunction

  int t_acc;
  task automatic post(wqe_t w);
    @(negedge clk);
    p.db_valid[0] = 1; p.db_wqe[0] = w;
    do @(posedge clk); while (!p.db_ready[0]);
    t_acc = p.now;
    #1 p.db_valid[0] = 0;
  endtask

  task automatic wait_cqes(int n, int cnt);
    int guard = 0;
    while (cq[n].size() < cnt && guard < 20000) begin @(posedge clk); guard++; end
    chk(cq[n].size() >= cnt, $sformatf("expected %0d completions, have %0d", cnt, cq[n].size()));
  endtask

  function automatic cqe_t find(int jetty, int tsn);
    foreach (cq[0][i]) if (cq[0][i].jetty == 10'(jetty) && cq[0][i].tsn == 16'(tsn)) return cq[0][i];
    return '0;
  endfunction

  task automatic ls(logic we, logic [31:0] addr, logic [63:0] d, output int lat);
    int t0;
    @(negedge clk);
    ls_got = 0;
    p.ls_req_valid[0] = 1; p.ls_req_we[0] = we; p.ls_req_addr[0] = addr; p.ls_req_wdata[0] = d;
    do @(posedge clk); while (!p.ls_req_ready[0]);
    t0 = p.now;
    #1 p.ls_req_valid[0] = 0;
    lat = -1;
    while (lat < 0) begin @(posedge clk); if (p.tx_valid[0]) lat = p.now - t0; end
    while (!ls_got) @(posedge clk);
  endtask

  task automatic stat(input int n, input int sel, output int v);
    p.stat_sel[n] = 6'(sel);
    #1;
    v = int'(p.stat_val[n]);
  endtask

  int lat, base, ncq;
  cqe_t c;
  string names [37] = '{"fence wait", "initiator SO park", "target SO park", "window stall", "window back-off",
    "retransmit", "RTO", "SACK", "out-of-order", "duplicate", "FECN mark", "fused ack", "JG dispatch", "no RQ",
    "completion reorder", "LD/ST frame", "LD/ST timeout", "atomic", "READ fault", "WRITE fault", "bad FCS",
    "good frame", "rx overflow", "cqe gen", "cqe written", "spray", "bad doorbell", "jsched drop", "no channel",
    "misroute", "bad btah", "bad op", "bad utp", "window", "reorder occ", "jg pick", "rq src"};

  initial begin
    idle_all();
    reset_dut();
    configure();
    repeat (20) @(posedge clk);

    // ---- 1. cold-path WRITE (ROL+NO), first wire word 24 cycles after the doorbell
    post(mk(OP_WRITE, 0, 32'h100, 64'h1111_2222_3333_4444, SM_ROL, EO_NO));
    lat = -1;
    while (lat < 0) begin @(posedge clk); if (p.tx_valid[0]) lat = p.now - t_acc; end
    chk(lat == 24, $sformatf("cold-path latency %0d, expected 24", lat));
    wait_cqes(0, 1);
    c = find(0, 0);
    chk(c.op == OP_TAACK && c.status == ST_OK, "WRITE completed with fused TAACK");

    // ---- 2. load/store bypass: STORE then LOAD, first word at 8 cycles
    repeat (50) @(posedge clk);
    ls(1'b1, {16'd2, 16'h0200}, 64'hDEAD_BEEF_0BAD_F00D, lat);
    chk(lat == 8, $sformatf("bypass first-word latency %0d, expected 8", lat));
    chk(ls_st == ST_OK, "STORE acked");
    ls(1'b0, {16'd2, 16'h0200}, 64'd0, lat);
    chk(ls_st == ST_OK && ls_data == 64'hDEAD_BEEF_0BAD_F00D, "LOAD returns stored word");

    // ---- 3. READ of the WRITE data, atomics
    post(mk(OP_READ, 1, 32'h100, 0));
    post(mk(OP_WRITE, 1, 32'h300, 64'd5));
    post(mk(OP_ATOMIC, 1, 32'h300, 64'd3, SM_ROI, EO_SO, 0, 0, AT_FADD));
    post(mk(OP_ATOMIC, 1, 32'h300, 64'd100, SM_ROI, EO_SO, 0, 0, AT_CAS, 64'd8));
    post(mk(OP_READ, 1, 32'h300, 0, SM_ROI, EO_SO));
    wait_cqes(0, 6);
    chk(find(1, 0).data == 64'h1111_2222_3333_4444, "READ returns WRITE data");
    chk(find(1, 2).data == 64'd5, "FAA returns old value 5");
    chk(find(1, 3).data == 64'd8, "CAS returns old value 8");
    chk(find(1, 4).data == 64'd100, "CAS swapped in 100");

    // ---- 4. fence and initiator-side strong order
    post(mk(OP_WRITE, 2, 32'h400, 64'd1, SM_ROI, EO_RO));
    post(mk(OP_WRITE, 2, 32'h408, 64'd2, SM_ROI, EO_NO, 1'b1));
    post(mk(OP_WRITE, 3, 32'h410, 64'd3, SM_ROI, EO_RO));
    post(mk(OP_WRITE, 3, 32'h418, 64'd4, SM_ROI, EO_SO));
    post(mk(OP_WRITE, 6, 32'h420, 64'd5, SM_UNO, EO_NO));
    wait_cqes(0, 11);

    // ---- 5. ROT reads and a ROT strong-order write while B's transmit port is held
    p.hold_b_tx = 1'b1;
    for (int k = 0; k < 8; k++) post(mk(OP_READ, 4, 32'h100, 0, SM_ROT, EO_RO));
    post(mk(OP_WRITE, 4, 32'h428, 64'd9, SM_ROT, EO_SO));
    // ---- 6. in-order completion: ROI WRITE (TAACK after execution) then a
    //         comp_ord UNO WRITE whose fused ack overtakes it at B
    post(mk(OP_WRITE, 5, 32'h438, 64'd6, SM_ROI, EO_NO));
    post(mk(OP_WRITE, 5, 32'h430, 64'd7, SM_UNO, EO_NO, 0, 1'b1));
    repeat (300) @(posedge clk);
    p.hold_b_tx = 1'b0;
    wait_cqes(0, 22);
    begin
      int i0, i1;
      i0 = -1; i1 = -1;
      foreach (cq[0][i]) if (cq[0][i].jetty == 10'd5) begin
        if (cq[0][i].tsn == 16'd0) i0 = i;
        if (cq[0][i].tsn == 16'd1) i1 = i;
      end
      chk(i0 >= 0 && i1 > i0, "comp_ord WRITE reported after the earlier WRITE");
    end

    // ---- 7. reordering: hold one A->B frame behind the next
    p.swap_a2b = 1;
    for (int k = 0; k < 4; k++) post(mk(OP_WRITE, 7, 32'h500 + 8 * k, 64'(k), SM_UNO, EO_NO));
    wait_cqes(0, 26);

    // ---- 8. loss of the last frame of a burst: recovered by the retransmit timer
    p.drop_a2b = 1;
    post(mk(OP_WRITE, 8, 32'h600, 64'h66, SM_ROL, EO_NO));
    wait_cqes(0, 27);
    chk(find(8, 0).status == ST_OK, "lost WRITE recovered");

    // ---- 9. FECN marks and a burst that exceeds the window
    p.mark_a2b = 6;
    for (int k = 0; k < 24; k++) post(mk(OP_WRITE, 9 + (k % 6), 32'h700 + 8 * k, 64'(k), SM_UNO, EO_NO));
    wait_cqes(0, 51);

    // ---- 10. Jetty-Group SEND, MR fault, load timeout
    for (int k = 0; k < 4; k++) begin
      wqe_t w;
      w = mk(OP_SEND, 16, 0, 64'(32'hA0 + k), SM_ROI, EO_NO);
      w.dst_jetty = 10'd40;
      post(w);
    end
    begin
      wqe_t w;
      w = mk(OP_READ, 17, 32'h100, 0);
      w.token = 32'hBAD;
      post(w);
    end
    wait_cqes(0, 56);
    chk(find(16, 0).status == ST_OK && find(16, 3).status == ST_OK, "SENDs to group delivered");
    chk(find(17, 0).status == ST_MR_FAULT, "bad token gives MR fault");
    @(negedge clk); p.rq_pop_valid[1] = 1; p.rq_pop_jetty[1] = 10'd11;
    @(negedge clk); p.rq_pop_valid[1] = 0;
    chk(p.rq_pop_ok[1] && p.rq_pop_data[1] == 64'hA1, "member 11 received the second SEND");
    ls(1'b0, {16'd9, 16'h0000}, 64'd0, lat);
    chk(ls_st == ST_TIMEOUT, "load to absent node times out");

    // ---- mechanism census
    repeat (100) @(posedge clk);
    begin
      int a [37], b [37];
      for (int s = 0; s < 37; s++) begin stat(0, s, a[s]); stat(1, s, b[s]); end
      $display("mechanism counts (A / B):");
      for (int s = 0; s < 37; s++) $display("  %-20s %6d %6d", names[s], a[s], b[s]);
      chk(a[0] > 0, "fence wait happened");
      chk(a[1] > 0, "initiator SO park happened");
      chk(a[3] > 0, "window stall happened");
      chk(a[4] > 0, "window back-off (ECN) happened");
      chk(a[5] > 0, "retransmission happened");
      chk(a[6] > 0, "RTO fired");
      chk(b[7] > 0, "SACK sent");
      chk(b[8] > 0, "out-of-order arrival handled");
      chk(b[10] > 0, "FECN marks seen");
      chk(b[11] > 0, "fused ack used");
      chk(b[12] == 4, "four Jetty-Group dispatches");
      chk(a[14] > 0, "completion reorder park happened");
      chk(a[15] >= 3, "bypass frames sent");
      chk(a[16] == 1, "one bypass timeout");
      chk(b[17] == 2, "two atomics executed");
      chk(b[18] == 1, "one READ fault");
      chk(a[25] > 0, "UNO spraying happened");
      chk(a[20] == 0 && b[20] == 0, "no FCS errors");
      chk(a[24] == a[23], "every completion written");
    end
    finish_tb();
  end
endmodule
