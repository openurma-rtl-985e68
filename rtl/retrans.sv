// retrans: retransmission buffer, a 64-slot ring per TP Channel.
//
// Every reliable data packet is written into slot (channel, PSN mod 64) as it
// passes (one cycle, the retransmit-buffer stage of the TX path). The slot
// holds the whole single-flit packet, so replay covers control operations and
// <= 8-byte writes, as in the design. Acknowledgement events from the receive
// side free slots up to the cumulative PSN. A selective acknowledgement
// (bitmap of received PSNs above the cumulative point) triggers replay: in
// selective mode only the holes below the highest PSN the peer has seen; in
// go-back-N mode every unacknowledged packet. An RTO expiry from the timer
// replays the oldest packet (selective) or the whole window (go-back-N).
// Replays take priority, then outgoing transport ACKs from the local ACK
// generator (passed through, not stored), then new packets. Timer events tell
// the RTO timer when a channel becomes busy, makes progress or drains.
// A single replay engine serves all channels; a trigger arriving while it is
// busy is dropped (the RTO timer fires again).
module retrans
  import urma_pkg::*;
#(
  parameter int unsigned NUM_TPC    = 1024,
  parameter int unsigned RETX_SLOTS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,      // new packets from the congestion window
  output logic        in_ready,
  input  pkt_t        in_pkt,
  input  logic        ack_in_valid,  // transport ACKs generated locally
  output logic        ack_in_ready,
  input  pkt_t        ack_in_pkt,
  output logic        out_valid,
  input  logic        out_ready,
  output pkt_t        out_pkt,
  input  logic        ack_valid,     // acknowledgement events from the peer
  input  ack_evt_t    ack_evt,
  input  logic        mode_sel,      // 1: selective, 0: go-back-N (channel of ack/rto)
  output tpc_id_t     mode_idx,
  input  logic        rto_valid,     // RTO expiry of one channel
  input  tpc_id_t     rto_tpc,
  output logic        rto_ready,
  output logic        tmr_valid,     // timer restart / stop for one channel
  output tpc_id_t     tmr_tpc,
  output logic        tmr_busy,
  output logic [15:0] replay_cnt
);
  localparam int unsigned CW = $clog2(NUM_TPC);
  localparam int unsigned SW = $clog2(RETX_SLOTS);

  pkt_t ring [NUM_TPC*RETX_SLOTS];
  psn_t una  [NUM_TPC];
  psn_t nxt  [NUM_TPC];

  // replay engine
  logic          rp_busy;
  logic [CW-1:0] rp_c;
  psn_t          rp_psn, rp_end;
  logic [63:0]   rp_skip;    // bit i: PSN una+i already received by the peer
  psn_t          rp_base;
  logic          rp_emit;
  psn_t          rp_off;
  assign rp_off  = rp_psn - rp_base;
  assign rp_emit = rp_busy && !(rp_off < 24'd64 && rp_skip[rp_off[5:0]]);

  logic out_free;
  assign out_free     = !out_valid || out_ready;
  assign ack_in_ready = out_free && !rp_busy;
  assign in_ready     = out_free && !rp_busy && !ack_in_valid;
  assign rto_ready    = !rp_busy && !ack_valid;
  assign mode_idx     = ack_valid ? ack_evt.tpc : rto_tpc;

  logic [CW-1:0] nc, ac, tc;
  assign nc = in_pkt.src_tpn[CW-1:0];
  assign ac = ack_evt.tpc[CW-1:0];
  assign tc = rto_tpc[CW-1:0];
  logic new_data;
  assign new_data = in_valid && in_ready && (in_pkt.tp_type == TP_RTP) && (in_pkt.rtp_op == RTP_DATA);

  // highest PSN the peer reports in the SACK bitmap
  logic [6:0] sack_top;
  always_comb begin
    sack_top = '0;
    for (int i = 0; i < 64; i++) if (ack_evt.sack[i]) sack_top = 7'(i + 1);
  end

  always_ff @(posedge clk) begin
    if (new_data) ring[{nc, in_pkt.psn[SW-1:0]}] <= in_pkt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pkt <= '0;
      rp_busy <= 1'b0; rp_c <= '0; rp_psn <= '0; rp_end <= '0; rp_skip <= '0; rp_base <= '0;
      tmr_valid <= 1'b0; tmr_tpc <= '0; tmr_busy <= 1'b0;
      replay_cnt <= '0;
      for (int i = 0; i < int'(NUM_TPC); i++) begin una[i] <= '0; nxt[i] <= '0; end
    end else begin
      tmr_valid <= 1'b0;
      // output
      if (out_free) begin
        if (rp_emit) begin
          out_valid <= 1'b1;
          out_pkt   <= ring[{rp_c, rp_psn[SW-1:0]}];
          replay_cnt <= replay_cnt + 16'd1;
        end else if (ack_in_valid && !rp_busy) begin
          out_valid <= 1'b1;
          out_pkt   <= ack_in_pkt;
        end else if (in_valid && in_ready) begin
          out_valid <= 1'b1;
          out_pkt   <= in_pkt;
        end else begin
          out_valid <= 1'b0;
        end
      end
      if (rp_busy && (out_free || !rp_emit)) begin
        if (rp_psn + 1'b1 == rp_end) rp_busy <= 1'b0;
        rp_psn <= rp_psn + 1'b1;
      end
      if (new_data) begin
        nxt[nc] <= in_pkt.psn + 1'b1;
        if (in_pkt.psn == una[nc]) begin   // channel was idle: start its timer
          tmr_valid <= 1'b1; tmr_tpc <= tpc_id_t'(nc); tmr_busy <= 1'b1;
        end
      end
      // acknowledgement: free slots, maybe replay
      if (ack_valid) begin
        psn_t adv, outst, nuna;
        adv   = ack_evt.ack_psn + 1'b1 - una[ac];
        outst = nxt[ac] - una[ac];
        nuna  = (adv <= outst) ? ack_evt.ack_psn + 1'b1 : una[ac];
        if (adv != '0 && adv <= outst) begin
          una[ac]   <= nuna;
          tmr_valid <= 1'b1; tmr_tpc <= ack_evt.tpc; tmr_busy <= (nuna != nxt[ac]);
        end
        if (ack_evt.is_sack && !rp_busy && (nxt[ac] != nuna) && (!mode_sel || sack_top != '0)) begin
          rp_busy <= 1'b1;
          rp_c    <= ac;
          rp_psn  <= nuna;
          rp_base <= nuna;
          if (mode_sel) begin
            rp_skip <= ack_evt.sack;
            rp_end  <= ack_evt.ack_psn + 1'b1 + psn_t'(sack_top);
          end else begin
            rp_skip <= '0;
            rp_end  <= nxt[ac];
          end
        end
      end else if (rto_valid && rto_ready && (nxt[tc] != una[tc])) begin
        rp_busy <= 1'b1;
        rp_c    <= tc;
        rp_psn  <= una[tc];
        rp_base <= una[tc];
        rp_skip <= '0;
        rp_end  <= mode_sel ? una[tc] + 1'b1 : nxt[tc];
      end
    end
  end
endmodule
