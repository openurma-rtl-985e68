// urma_nic: Unified Bus NIC pipeline, top level.
//
// One network controller implementing the transaction layer (URMA work
// queues, ordering, memory access, completions) and the transport layer
// (reliable TP Channels with window, retransmission and congestion echo, and
// an unreliable bypass for CPU load/store) on a 64-bit Ethernet word stream.
//
// Transmit (initiator):
//   db_* -> doorbell -> jsched (Jetty table) -> ord_ini -> btah_b -> tx_mux
//   (requests / target responses) -> tpc_tx -> tpg -> cwnd -> retrans (also
//   merges transport ACKs and replays) -> rtph_b -> nth_b -> ethenc
//   -> wire_arb (with the ldst_bypass frames) -> tx_*
// Receive:
//   rx_* -> ethdec -> nth_p -> rtph_p -> tpc_rx (reorder, cong_echo; ACK
//   requests to tpack) -> btah_p -> ord_tgt -> dispatch_mux -> dispatch;
//   nth_p -> utph_p (load/store requests and responses) -> dispatch_mux;
//   rtph_p ACK events -> cwnd, retrans; fused transaction acks -> dispatch_mux
// Execution (target): dispatch -> hbm_rd / hbm_wr / atom (mr_tab checks,
//   nic_mem) and jg_dispatch -> jrecv; results -> dispatch_mux -> taack
//   -> tx_mux; taack execution-done -> ord_tgt.
// Completion (initiator): dispatch -> comp_gen -> comp_reord
//   -> comp_notify_tee (notifies jsched and ord_ini) -> cqe_stream -> poll_*.
//
// All ports are plain vectors; structured fields are packed in the order of
// the shared package types (wqe_t, cqe_t, jetty_rec_t, tpc_cfg_t, mr_rec_t).
// Event counters are read through stat_sel / stat_val (see the case list).
// Cold-path latency from doorbell to first wire word is 24 cycles; the
// load/store bypass emits its first word 8 cycles after the CPU request.
module urma_nic
  import urma_pkg::*;
#(
  parameter int unsigned NUM_JETTY  = 1024,
  parameter int unsigned NUM_TPC    = 1024,
  parameter int unsigned WQ_DEPTH   = 4,
  parameter int unsigned RETX_SLOTS = 64,
  parameter int unsigned INIT_WIN   = 65536,
  parameter int unsigned MIN_WIN    = 4096,
  parameter int unsigned RTO_BASE   = 4096,
  parameter int unsigned MR_ENTRIES = 64,
  parameter int unsigned MEM_BYTES  = 65536,
  parameter int unsigned JG_GROUPS  = 16,
  parameter int unsigned JG_MEMBERS = 8,
  parameter int unsigned RQ_DEPTH   = 4,
  parameter int unsigned LS_TIMEOUT = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [CNA_W-1:0]         local_cna,
  // configuration
  input  logic                     jt_wr_en,
  input  logic [JETTY_W-1:0]       jt_wr_idx,
  input  logic [$bits(jetty_rec_t)-1:0] jt_wr_rec,
  input  logic                     tp_wr_en,
  input  logic [TPC_W-1:0]         tp_wr_idx,
  input  logic [$bits(tpc_cfg_t)-1:0] tp_wr_cfg,
  input  logic                     mr_wr_en,
  input  logic [MRKEY_W-1:0]       mr_wr_key,
  input  logic [$bits(mr_rec_t)-1:0] mr_wr_rec,
  input  logic                     jg_cfg_valid,
  input  logic [$clog2(JG_GROUPS)-1:0] jg_cfg_idx,
  input  logic                     jg_cfg_en,
  input  logic [JETTY_W-1:0]       jg_cfg_gid,
  input  logic [1:0]               jg_cfg_policy,
  input  logic [3:0]               jg_cfg_nmem,
  input  logic [JG_MEMBERS*JETTY_W-1:0] jg_cfg_mem,
  // work-request doorbell
  input  logic                     db_valid,
  output logic                     db_ready,
  input  logic [$bits(wqe_t)-1:0]  db_wqe,
  // completion poll
  input  logic                     poll_valid,
  input  logic [7:0]               poll_jfc,
  output logic                     poll_ok,
  output logic [$bits(cqe_t)-1:0]  poll_cqe,
  // receive-queue pop
  input  logic                     rq_pop_valid,
  input  logic [JETTY_W-1:0]       rq_pop_jetty,
  output logic                     rq_pop_ok,
  output logic [63:0]              rq_pop_data,
  // CPU load/store aperture
  input  logic                     ls_req_valid,
  output logic                     ls_req_ready,
  input  logic                     ls_req_we,
  input  logic [31:0]              ls_req_addr,
  input  logic [63:0]              ls_req_wdata,
  output logic [7:0]               ls_req_ctx,
  output logic                     ls_resp_valid,
  output logic [63:0]              ls_resp_data,
  output logic [3:0]               ls_resp_status,
  output logic [7:0]               ls_resp_ctx,
  // Ethernet word stream
  output logic                     tx_valid,
  input  logic                     tx_ready,
  output logic [63:0]              tx_data,
  output logic                     tx_last,
  input  logic                     rx_valid,
  input  logic [63:0]              rx_data,
  input  logic                     rx_last,
  // statistics
  input  logic [5:0]               stat_sel,
  output logic [31:0]              stat_val
);
  // ================================================================ tables
  jetty_id_t  [1:0] jt_rd_idx;
  jetty_rec_t [1:0] jt_rd_rec;
  jt_tab #(.NUM_JETTY(NUM_JETTY), .NRD(2)) u_jt_tab (
    .clk, .rst_n, .wr_en(jt_wr_en), .wr_idx(jt_wr_idx), .wr_rec(jetty_rec_t'(jt_wr_rec)),
    .rd_idx(jt_rd_idx), .rd_rec(jt_rd_rec));

  tpc_id_t  [3:0] tp_rd_idx;
  tpc_cfg_t [3:0] tp_rd_cfg;
  tp_tab #(.NUM_TPC(NUM_TPC), .NRD(4)) u_tp_tab (
    .clk, .rst_n, .wr_en(tp_wr_en), .wr_idx(tp_wr_idx), .wr_cfg(tpc_cfg_t'(tp_wr_cfg)),
    .rd_idx(tp_rd_idx), .rd_cfg(tp_rd_cfg));

  mr_key_t     [2:0]       chk_key;
  logic        [2:0][31:0] chk_addr;
  logic        [2:0][15:0] chk_len;
  logic        [2:0][31:0] chk_token;
  logic        [2:0][2:0]  chk_kind;
  logic        [2:0]       chk_ok;
  mr_tab #(.MR_ENTRIES(MR_ENTRIES), .NCHK(3)) u_mr_tab (
    .clk, .rst_n, .wr_en(mr_wr_en), .wr_key(mr_wr_key), .wr_rec(mr_rec_t'(mr_wr_rec)),
    .chk_key, .chk_addr, .chk_len, .chk_token, .chk_kind, .chk_ok);

  // ================================================================ transmit
  logic db_o_valid, db_o_ready;
  wqe_t db_o_wqe;
  logic [15:0] db_bad;
  doorbell #(.NUM_JETTY(NUM_JETTY)) u_doorbell (
    .clk, .rst_n, .db_valid, .db_ready, .db_wqe(wqe_t'(db_wqe)),
    .out_valid(db_o_valid), .out_ready(db_o_ready), .out_wqe(db_o_wqe), .bad_cnt(db_bad));

  logic js_valid, js_ready;
  wr_t  js_wr;
  logic cn_valid;
  cqe_t cn_cqe;
  logic [15:0] js_drop, js_fence;
  jsched #(.NUM_JETTY(NUM_JETTY), .WQ_DEPTH(WQ_DEPTH)) u_jsched (
    .clk, .rst_n, .in_valid(db_o_valid), .in_ready(db_o_ready), .in_wqe(db_o_wqe),
    .out_valid(js_valid), .out_ready(js_ready), .out_wr(js_wr),
    .jt_idx(jt_rd_idx[0]), .jt_rec(jt_rd_rec[0]),
    .cn_valid, .cn_jetty(cn_cqe.jetty), .drop_cnt(js_drop), .fence_wait_cnt(js_fence));

  logic oi_valid, oi_ready;
  wr_t  oi_wr;
  logic [15:0] oi_park;
  ord_ini #(.NUM_JETTY(NUM_JETTY)) u_ord_ini (
    .clk, .rst_n, .in_valid(js_valid), .in_ready(js_ready), .in_wr(js_wr),
    .out_valid(oi_valid), .out_ready(oi_ready), .out_wr(oi_wr),
    .cn_valid, .cn_cqe, .park_cnt(oi_park));

  logic bb_valid, bb_ready;
  pkt_t bb_pkt;
  btah_b u_btah_b (
    .clk, .rst_n, .in_valid(oi_valid), .in_ready(oi_ready), .in_wr(oi_wr),
    .out_valid(bb_valid), .out_ready(bb_ready), .out_pkt(bb_pkt));

  logic ta_valid, ta_ready;
  pkt_t ta_pkt;
  logic [3:0] txm_in_valid, txm_in_ready;
  pkt_t [3:0] txm_in_pkt;
  logic txm_valid, txm_ready;
  pkt_t txm_pkt;
  assign txm_in_valid = {2'b00, ta_valid, bb_valid};
  assign txm_in_pkt   = {pkt_t'('0), pkt_t'('0), ta_pkt, bb_pkt};
  assign bb_ready     = txm_in_ready[0];
  assign ta_ready     = txm_in_ready[1];
  tx_mux #(.NUM_IN(4)) u_tx_mux (
    .clk, .rst_n, .in_valid(txm_in_valid), .in_ready(txm_in_ready), .in_pkt(txm_in_pkt),
    .out_valid(txm_valid), .out_ready(txm_ready), .out_pkt(txm_pkt));

  logic tt_valid, tt_ready;
  pkt_t tt_pkt;
  logic [15:0] tt_nochan;
  tpc_tx #(.NUM_TPC(NUM_TPC)) u_tpc_tx (
    .clk, .rst_n, .in_valid(txm_valid), .in_ready(txm_ready), .in_pkt(txm_pkt),
    .out_valid(tt_valid), .out_ready(tt_ready), .out_pkt(tt_pkt),
    .tp_idx(tp_rd_idx[0]), .tp_cfg(tp_rd_cfg[0]), .nochan_cnt(tt_nochan));

  logic tg_valid, tg_ready;
  pkt_t tg_pkt;
  logic [15:0] tg_spray;
  tpg u_tpg (
    .clk, .rst_n, .in_valid(tt_valid), .in_ready(tt_ready), .in_pkt(tt_pkt),
    .out_valid(tg_valid), .out_ready(tg_ready), .out_pkt(tg_pkt), .spray_cnt(tg_spray));

  logic     ack_ev_valid;
  ack_evt_t ack_ev;
  logic cw_valid, cw_ready;
  pkt_t cw_pkt;
  logic [15:0] cw_stall, cw_md;
  logic [31:0] cw_win;
  cwnd #(.NUM_TPC(NUM_TPC), .RETX_SLOTS(RETX_SLOTS), .INIT_WIN(INIT_WIN), .MIN_WIN(MIN_WIN)) u_cwnd (
    .clk, .rst_n, .in_valid(tg_valid), .in_ready(tg_ready), .in_pkt(tg_pkt),
    .out_valid(cw_valid), .out_ready(cw_ready), .out_pkt(cw_pkt),
    .ack_valid(ack_ev_valid), .ack_evt(ack_ev),
    .stall_cnt(cw_stall), .md_cnt(cw_md), .win_probe(cw_win));

  logic tk_valid, tk_ready;
  pkt_t tk_pkt;
  logic rt_valid, rt_ready;
  pkt_t rt_pkt;
  logic    fire_valid, fire_ready;
  tpc_id_t fire_tpc;
  logic    tmr_valid, tmr_busy;
  tpc_id_t tmr_tpc;
  logic [15:0] rt_replay, rto_fire;
  retrans #(.NUM_TPC(NUM_TPC), .RETX_SLOTS(RETX_SLOTS)) u_retrans (
    .clk, .rst_n, .in_valid(cw_valid), .in_ready(cw_ready), .in_pkt(cw_pkt),
    .ack_in_valid(tk_valid), .ack_in_ready(tk_ready), .ack_in_pkt(tk_pkt),
    .out_valid(rt_valid), .out_ready(rt_ready), .out_pkt(rt_pkt),
    .ack_valid(ack_ev_valid), .ack_evt(ack_ev),
    .mode_sel(tp_rd_cfg[1].selective), .mode_idx(tp_rd_idx[1]),
    .rto_valid(fire_valid), .rto_tpc(fire_tpc), .rto_ready(fire_ready),
    .tmr_valid, .tmr_tpc, .tmr_busy, .replay_cnt(rt_replay));

  rto #(.NUM_TPC(NUM_TPC), .RTO_BASE(RTO_BASE)) u_rto (
    .clk, .rst_n, .tmr_valid, .tmr_tpc, .tmr_busy,
    .fire_valid, .fire_tpc, .fire_ready, .fire_cnt(rto_fire));

  logic rb_valid, rb_ready;
  pkt_t rb_pkt;
  rtph_b u_rtph_b (
    .clk, .rst_n, .in_valid(rt_valid), .in_ready(rt_ready), .in_pkt(rt_pkt),
    .out_valid(rb_valid), .out_ready(rb_ready), .out_pkt(rb_pkt),
    .tp_idx(tp_rd_idx[2]), .tp_cfg(tp_rd_cfg[2]), .win(cw_win));

  logic nb_valid, nb_ready;
  pkt_t nb_pkt;
  nth_b u_nth_b (
    .clk, .rst_n, .local_cna, .in_valid(rb_valid), .in_ready(rb_ready), .in_pkt(rb_pkt),
    .out_valid(nb_valid), .out_ready(nb_ready), .out_pkt(nb_pkt),
    .tp_idx(tp_rd_idx[3]), .tp_cfg(tp_rd_cfg[3]));

  logic   ee_valid, ee_ready;
  wword_t ee_word;
  ethenc u_ethenc (
    .clk, .rst_n, .in_valid(nb_valid), .in_ready(nb_ready), .in_pkt(nb_pkt),
    .tx_valid(ee_valid), .tx_ready(ee_ready), .tx_word(ee_word));

  logic   ls_tx_valid, ls_tx_ready;
  wword_t ls_tx_word;
  logic   [1:0] wa_valid, wa_ready;
  wword_t wa_word [2];
  wword_t wa_out;
  assign wa_valid   = {ls_tx_valid, ee_valid};
  assign wa_word[0] = ee_word;
  assign wa_word[1] = ls_tx_word;
  assign ee_ready    = wa_ready[0];
  assign ls_tx_ready = wa_ready[1];
  wire_arb u_wire_arb (
    .clk, .rst_n, .in_valid(wa_valid), .in_ready(wa_ready), .in_word(wa_word),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_word(wa_out));
  assign tx_data = wa_out.data;
  assign tx_last = wa_out.last;

  // ================================================================ receive
  logic ed_valid, ed_ready;
  pkt_t ed_pkt;
  logic [15:0] ed_bad, ed_ovf, ed_good;
  ethdec u_ethdec (
    .clk, .rst_n, .rx_valid, .rx_word('{data: rx_data, last: rx_last}),
    .out_valid(ed_valid), .out_ready(ed_ready), .out_pkt(ed_pkt),
    .bad_cnt(ed_bad), .ovf_cnt(ed_ovf), .good_cnt(ed_good));

  logic np_rtp_valid, np_rtp_ready, np_utp_valid, np_utp_ready;
  pkt_t np_pkt;
  logic [15:0] np_mis;
  nth_p u_nth_p (
    .clk, .rst_n, .local_cna, .in_valid(ed_valid), .in_ready(ed_ready), .in_pkt(ed_pkt),
    .rtp_valid(np_rtp_valid), .rtp_ready(np_rtp_ready),
    .utp_valid(np_utp_valid), .utp_ready(np_utp_ready), .out_pkt(np_pkt), .misroute_cnt(np_mis));

  logic rp_data_valid, rp_data_ready, rp_fused_valid, rp_fused_ready;
  pkt_t rp_data_pkt, rp_fused_pkt;
  rtph_p u_rtph_p (
    .clk, .rst_n, .in_valid(np_rtp_valid), .in_ready(np_rtp_ready), .in_pkt(np_pkt),
    .data_valid(rp_data_valid), .data_ready(rp_data_ready), .data_pkt(rp_data_pkt),
    .fused_valid(rp_fused_valid), .fused_ready(rp_fused_ready), .fused_pkt(rp_fused_pkt),
    .ack_valid(ack_ev_valid), .ack_evt(ack_ev));

  logic up_req_valid, up_req_ready, up_resp_valid, up_resp_ready;
  pkt_t up_pkt;
  logic [15:0] up_bad;
  utph_p u_utph_p (
    .clk, .rst_n, .in_valid(np_utp_valid), .in_ready(np_utp_ready), .in_pkt(np_pkt),
    .req_valid(up_req_valid), .req_ready(up_req_ready),
    .resp_valid(up_resp_valid), .resp_ready(up_resp_ready), .out_pkt(up_pkt), .bad_cnt(up_bad));

  logic    ro_ins_valid, ro_ins_ok, ro_lk_valid, ro_lk_hit;
  tpc_id_t ro_ins_tpc, ro_lk_tpc;
  pkt_t    ro_ins_pkt, ro_lk_pkt;
  psn_t    ro_lk_psn;
  logic [7:0] ro_occ;
  reorder u_reorder (
    .clk, .rst_n, .ins_valid(ro_ins_valid), .ins_tpc(ro_ins_tpc), .ins_pkt(ro_ins_pkt),
    .ins_ok(ro_ins_ok), .lk_valid(ro_lk_valid), .lk_tpc(ro_lk_tpc), .lk_psn(ro_lk_psn),
    .lk_hit(ro_lk_hit), .lk_pkt(ro_lk_pkt), .occupancy(ro_occ));

  logic    ce_mark_valid, ce_fecn, ce_ece, ce_clr_valid;
  tpc_id_t ce_tpc;
  logic [15:0] ce_marks;
  cong_echo #(.NUM_TPC(NUM_TPC)) u_cong_echo (
    .clk, .rst_n, .mark_valid(ce_mark_valid), .mark_tpc(ce_tpc), .mark_fecn(ce_fecn),
    .q_tpc(ce_tpc), .q_ece(ce_ece), .clr_valid(ce_clr_valid), .clr_tpc(ce_tpc), .mark_cnt(ce_marks));

  logic    tr_valid, tr_ready, ar_valid, ar_ready;
  pkt_t    tr_pkt;
  ackreq_t ar_req;
  logic [15:0] tr_ooo, tr_dup;
  tpc_rx #(.NUM_TPC(NUM_TPC)) u_tpc_rx (
    .clk, .rst_n, .in_valid(rp_data_valid), .in_ready(rp_data_ready), .in_pkt(rp_data_pkt),
    .out_valid(tr_valid), .out_ready(tr_ready), .out_pkt(tr_pkt),
    .ack_valid(ar_valid), .ack_ready(ar_ready), .ack_req(ar_req),
    .ro_ins_valid, .ro_ins_tpc, .ro_ins_pkt, .ro_ins_ok,
    .ro_lk_valid, .ro_lk_tpc, .ro_lk_psn, .ro_lk_hit, .ro_lk_pkt,
    .ce_mark_valid, .ce_tpc, .ce_fecn, .ce_ece, .ce_clr_valid,
    .ooo_cnt(tr_ooo), .dup_cnt(tr_dup));

  logic [15:0] tk_sack;
  tpack u_tpack (
    .clk, .rst_n, .in_valid(ar_valid), .in_ready(ar_ready), .in_req(ar_req),
    .out_valid(tk_valid), .out_ready(tk_ready), .out_pkt(tk_pkt), .sack_cnt(tk_sack));

  logic bp_valid, bp_ready;
  pkt_t bp_pkt;
  logic [15:0] bp_bad;
  btah_p #(.NUM_JETTY(NUM_JETTY)) u_btah_p (
    .clk, .rst_n, .in_valid(tr_valid), .in_ready(tr_ready), .in_pkt(tr_pkt),
    .out_valid(bp_valid), .out_ready(bp_ready), .out_pkt(bp_pkt), .bad_cnt(bp_bad));

  logic ot_valid, ot_ready;
  pkt_t ot_pkt;
  logic done_valid;
  pkt_t done_pkt;
  logic [15:0] ot_park;
  ord_tgt #(.KEYS(NUM_JETTY)) u_ord_tgt (
    .clk, .rst_n, .in_valid(bp_valid), .in_ready(bp_ready), .in_pkt(bp_pkt),
    .out_valid(ot_valid), .out_ready(ot_ready), .out_pkt(ot_pkt),
    .done_valid, .done_pkt, .park_cnt(ot_park));

  // ================================================================ dispatch
  logic [3:0] dm_in_valid, dm_in_ready;
  pkt_t [3:0] dm_in_pkt;
  logic dm_valid, dm_ready;
  pkt_t dm_pkt;
  assign dm_in_valid   = {up_resp_valid, rp_fused_valid, up_req_valid, ot_valid};
  assign dm_in_pkt     = {up_pkt, rp_fused_pkt, up_pkt, ot_pkt};
  assign ot_ready      = dm_in_ready[0];
  assign up_req_ready  = dm_in_ready[1];
  assign rp_fused_ready= dm_in_ready[2];
  assign up_resp_ready = dm_in_ready[3];
  dispatch_mux #(.NUM_IN(4)) u_dispatch_mux (
    .clk, .rst_n, .in_valid(dm_in_valid), .in_ready(dm_in_ready), .in_pkt(dm_in_pkt),
    .out_valid(dm_valid), .out_ready(dm_ready), .out_pkt(dm_pkt));

  logic [5:0] ds_valid, ds_ready;
  pkt_t ds_pkt;
  logic [15:0] ds_bad;
  dispatch u_dispatch (
    .clk, .rst_n, .in_valid(dm_valid), .in_ready(dm_ready), .in_pkt(dm_pkt),
    .out_valid(ds_valid), .out_ready(ds_ready), .out_pkt(ds_pkt), .bad_cnt(ds_bad));

  // ================================================================ execution
  localparam int unsigned MAW = $clog2(MEM_BYTES / 8);
  logic [2:0]     mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [MAW-1:0] mem_addr  [3];
  logic [63:0]    mem_wdata [3];
  logic [7:0]     mem_be    [3];
  logic [63:0]    mem_rdata;
  nic_mem #(.MEM_BYTES(MEM_BYTES)) u_nic_mem (
    .clk, .rst_n, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata), .be(mem_be),
    .gnt(mem_gnt), .rvalid(mem_rvalid), .rdata(mem_rdata));

  logic [3:0] rm_in_valid, rm_in_ready;
  pkt_t [3:0] rm_in_pkt;

  logic [15:0] at_ops, rd_fault, wr_fault;
  atom #(.MEM_BYTES(MEM_BYTES)) u_atom (
    .clk, .rst_n, .in_valid(ds_valid[2]), .in_ready(ds_ready[2]), .in_pkt(ds_pkt),
    .out_valid(rm_in_valid[2]), .out_ready(rm_in_ready[2]), .out_pkt(rm_in_pkt[2]),
    .chk_key(chk_key[2]), .chk_addr(chk_addr[2]), .chk_len(chk_len[2]), .chk_token(chk_token[2]),
    .chk_kind(chk_kind[2]), .chk_ok(chk_ok[2]),
    .mem_req(mem_req[0]), .mem_we(mem_we[0]), .mem_addr(mem_addr[0]), .mem_wdata(mem_wdata[0]),
    .mem_gnt(mem_gnt[0]), .mem_rvalid(mem_rvalid[0]), .mem_rdata, .op_cnt(at_ops));
  assign mem_be[0] = 8'hFF;

  hbm_wr #(.MEM_BYTES(MEM_BYTES)) u_hbm_wr (
    .clk, .rst_n, .in_valid(ds_valid[1]), .in_ready(ds_ready[1]), .in_pkt(ds_pkt),
    .out_valid(rm_in_valid[1]), .out_ready(rm_in_ready[1]), .out_pkt(rm_in_pkt[1]),
    .chk_key(chk_key[1]), .chk_addr(chk_addr[1]), .chk_len(chk_len[1]), .chk_token(chk_token[1]),
    .chk_kind(chk_kind[1]), .chk_ok(chk_ok[1]),
    .mem_req(mem_req[1]), .mem_addr(mem_addr[1]), .mem_wdata(mem_wdata[1]), .mem_be(mem_be[1]),
    .mem_gnt(mem_gnt[1]), .fault_cnt(wr_fault));
  assign mem_we[1] = 1'b1;

  hbm_rd #(.MEM_BYTES(MEM_BYTES)) u_hbm_rd (
    .clk, .rst_n, .in_valid(ds_valid[0]), .in_ready(ds_ready[0]), .in_pkt(ds_pkt),
    .out_valid(rm_in_valid[0]), .out_ready(rm_in_ready[0]), .out_pkt(rm_in_pkt[0]),
    .chk_key(chk_key[0]), .chk_addr(chk_addr[0]), .chk_len(chk_len[0]), .chk_token(chk_token[0]),
    .chk_kind(chk_kind[0]), .chk_ok(chk_ok[0]),
    .mem_req(mem_req[2]), .mem_addr(mem_addr[2]),
    .mem_gnt(mem_gnt[2]), .mem_rvalid(mem_rvalid[2]), .mem_rdata, .fault_cnt(rd_fault));
  assign mem_we[2]    = 1'b0;
  assign mem_wdata[2] = '0;
  assign mem_be[2]    = '0;

  logic jg_valid, jg_ready;
  pkt_t jg_pkt;
  jetty_id_t [JG_MEMBERS-1:0] dq_jetty;
  logic [7:0] dq_depth [JG_MEMBERS];
  logic [15:0] jg_hits;
  logic [2:0]  jg_pick;
  jg_dispatch #(.GROUPS(JG_GROUPS), .MEMBERS(JG_MEMBERS)) u_jg_dispatch (
    .clk, .rst_n, .cfg_valid(jg_cfg_valid), .cfg_idx(jg_cfg_idx), .cfg_en(jg_cfg_en),
    .cfg_gid(jg_cfg_gid), .cfg_policy(jg_cfg_policy), .cfg_nmem(jg_cfg_nmem),
    .cfg_mem(jg_cfg_mem),
    .in_valid(ds_valid[3]), .in_ready(ds_ready[3]), .in_pkt(ds_pkt),
    .out_valid(jg_valid), .out_ready(jg_ready), .out_pkt(jg_pkt),
    .dq_jetty, .dq_depth, .hit_cnt(jg_hits), .last_pick(jg_pick));

  logic [15:0] norq;
  jetty_id_t   rq_src;
  jrecv #(.NUM_JETTY(NUM_JETTY), .RQ_DEPTH(RQ_DEPTH), .MEMBERS(JG_MEMBERS)) u_jrecv (
    .clk, .rst_n, .in_valid(jg_valid), .in_ready(jg_ready), .in_pkt(jg_pkt),
    .out_valid(rm_in_valid[3]), .out_ready(rm_in_ready[3]), .out_pkt(rm_in_pkt[3]),
    .pop_valid(rq_pop_valid), .pop_jetty(rq_pop_jetty), .pop_ok(rq_pop_ok),
    .pop_data(rq_pop_data), .pop_src(rq_src), .dq_jetty, .dq_depth, .norq_cnt(norq));

  logic rm_valid, rm_ready;
  pkt_t rm_pkt;
  dispatch_mux #(.NUM_IN(4)) u_result_mux (
    .clk, .rst_n, .in_valid(rm_in_valid), .in_ready(rm_in_ready), .in_pkt(rm_in_pkt),
    .out_valid(rm_valid), .out_ready(rm_ready), .out_pkt(rm_pkt));

  logic [15:0] ta_fused;
  taack u_taack (
    .clk, .rst_n, .in_valid(rm_valid), .in_ready(rm_ready), .in_pkt(rm_pkt),
    .out_valid(ta_valid), .out_ready(ta_ready), .out_pkt(ta_pkt),
    .done_valid, .done_pkt, .fused_cnt(ta_fused));

  // ================================================================ completion
  logic cg_valid, cg_ready;
  cqe_t cg_cqe;
  logic [15:0] cg_cnt;
  comp_gen u_comp_gen (
    .clk, .rst_n, .in_valid(ds_valid[4]), .in_ready(ds_ready[4]), .in_pkt(ds_pkt),
    .out_valid(cg_valid), .out_ready(cg_ready), .out_cqe(cg_cqe),
    .jt_idx(jt_rd_idx[1]), .jt_rec(jt_rd_rec[1]), .cqe_cnt(cg_cnt));

  logic cr_valid, cr_ready;
  cqe_t cr_cqe;
  logic [15:0] cr_park;
  comp_reord #(.NUM_JETTY(NUM_JETTY)) u_comp_reord (
    .clk, .rst_n, .in_valid(cg_valid), .in_ready(cg_ready), .in_cqe(cg_cqe),
    .out_valid(cr_valid), .out_ready(cr_ready), .out_cqe(cr_cqe), .park_cnt(cr_park));

  logic cn_o_valid, cn_o_ready;
  cqe_t cn_o_cqe;
  comp_notify_tee u_comp_notify_tee (
    .clk, .rst_n, .in_valid(cr_valid), .in_ready(cr_ready), .in_cqe(cr_cqe),
    .out_valid(cn_o_valid), .out_ready(cn_o_ready), .out_cqe(cn_o_cqe),
    .cn_valid, .cn_cqe);

  cqe_t        poll_c;
  logic [15:0] cq_wr;
  cqe_stream u_cqe_stream (
    .clk, .rst_n, .in_valid(cn_o_valid), .in_ready(cn_o_ready), .in_cqe(cn_o_cqe),
    .poll_valid, .poll_jfc, .poll_ok, .poll_cqe(poll_c), .wr_cnt(cq_wr));
  assign poll_cqe = poll_c;

  // ================================================================ load/store bypass
  logic [15:0] ls_timeouts, ls_sent;
  status_e     ls_st;
  ldst_bypass #(.TIMEOUT(LS_TIMEOUT)) u_ldst_bypass (
    .clk, .rst_n, .local_cna,
    .cpu_req_valid(ls_req_valid), .cpu_req_ready(ls_req_ready), .cpu_req_we(ls_req_we),
    .cpu_req_addr(ls_req_addr), .cpu_req_wdata(ls_req_wdata),
    .cpu_resp_valid(ls_resp_valid), .cpu_resp_data(ls_resp_data), .cpu_resp_status(ls_st),
    .cpu_resp_ctx(ls_resp_ctx), .cpu_req_ctx(ls_req_ctx),
    .tx_valid(ls_tx_valid), .tx_ready(ls_tx_ready), .tx_word(ls_tx_word),
    .resp_valid(ds_valid[5]), .resp_ready(ds_ready[5]), .resp_pkt(ds_pkt),
    .timeout_cnt(ls_timeouts), .sent_cnt(ls_sent));
  assign ls_resp_status = ls_st;

  // ================================================================ statistics
  always_comb begin
    unique case (stat_sel)
      6'd0:  stat_val = {16'd0, js_fence};      // fenced WRs that had to wait
      6'd1:  stat_val = {16'd0, oi_park};       // initiator SO parks
      6'd2:  stat_val = {16'd0, ot_park};       // target SO parks
      6'd3:  stat_val = {16'd0, cw_stall};      // window stalls
      6'd4:  stat_val = {16'd0, cw_md};         // multiplicative decreases
      6'd5:  stat_val = {16'd0, rt_replay};     // retransmitted packets
      6'd6:  stat_val = {16'd0, rto_fire};      // retransmit timeouts
      6'd7:  stat_val = {16'd0, tk_sack};       // SACKs sent
      6'd8:  stat_val = {16'd0, tr_ooo};        // out-of-order arrivals
      6'd9:  stat_val = {16'd0, tr_dup};        // duplicates
      6'd10: stat_val = {16'd0, ce_marks};      // FECN marks seen
      6'd11: stat_val = {16'd0, ta_fused};      // TAACKs fused into transport ACKs
      6'd12: stat_val = {16'd0, jg_hits};       // Jetty-Group dispatches
      6'd13: stat_val = {16'd0, norq};          // SENDs without receive buffer
      6'd14: stat_val = {16'd0, cr_park};       // completions held for order
      6'd15: stat_val = {16'd0, ls_sent};       // load/store frames sent
      6'd16: stat_val = {16'd0, ls_timeouts};   // load/store timeouts
      6'd17: stat_val = {16'd0, at_ops};        // atomics executed
      6'd18: stat_val = {16'd0, rd_fault};      // READ permission faults
      6'd19: stat_val = {16'd0, wr_fault};      // WRITE permission faults
      6'd20: stat_val = {16'd0, ed_bad};        // frames with bad FCS / length
      6'd21: stat_val = {16'd0, ed_good};       // good frames received
      6'd22: stat_val = {16'd0, ed_ovf};        // frames dropped, receive FIFO full
      6'd23: stat_val = {16'd0, cg_cnt};        // completions generated
      6'd24: stat_val = {16'd0, cq_wr};         // completions written
      6'd25: stat_val = {16'd0, tg_spray};      // multi-path sprayed packets
      6'd26: stat_val = {16'd0, db_bad};        // rejected doorbells
      6'd27: stat_val = {16'd0, js_drop};       // doorbells dropped, queue full
      6'd28: stat_val = {16'd0, tt_nochan};     // packets without TP Channel
      6'd29: stat_val = {16'd0, np_mis};        // misrouted frames
      6'd30: stat_val = {16'd0, bp_bad};        // bad transaction headers
      6'd31: stat_val = {16'd0, ds_bad};        // undeliverable opcodes
      6'd32: stat_val = {16'd0, up_bad};        // bad bypass packets
      6'd33: stat_val = cw_win;                 // congestion window of channel 0
      6'd34: stat_val = {24'd0, ro_occ};        // reorder buffer occupancy
      6'd35: stat_val = {29'd0, jg_pick};       // last Jetty-Group member picked
      6'd36: stat_val = {22'd0, rq_src};        // source Jetty of last popped message
      default: stat_val = '0;
    endcase
  end
endmodule
