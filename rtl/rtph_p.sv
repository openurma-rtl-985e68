// rtph_p: reliable transport header parser.
//
// Splits reliable packets by transport opcode. Data packets go on to the
// per-channel receive logic. ACK and SACK packets become acknowledgement
// events (local channel = the ACK's destination TP number, cumulative PSN,
// SACK bitmap, congestion echo) broadcast to the congestion window, the
// retransmit buffer and the timer; an ACK that also carries a fused
// transaction acknowledgement is forwarded as a completion packet (opcode
// TAACK) towards the completion generator. One cycle.
module rtph_p
  import urma_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  pkt_t     in_pkt,
  output logic     data_valid,
  input  logic     data_ready,
  output pkt_t     data_pkt,
  output logic     fused_valid,
  input  logic     fused_ready,
  output pkt_t     fused_pkt,
  output logic     ack_valid,
  output ack_evt_t ack_evt
);
  logic is_ack;
  assign is_ack   = (in_pkt.rtp_op == RTP_ACK) || (in_pkt.rtp_op == RTP_SACK);
  assign in_ready = !(data_valid && !data_ready) && !(fused_valid && !fused_ready);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_valid <= 1'b0; fused_valid <= 1'b0; ack_valid <= 1'b0;
      data_pkt <= '0; fused_pkt <= '0; ack_evt <= '0;
    end else begin
      ack_valid <= 1'b0;
      if (in_ready) begin
        data_valid  <= in_valid && !is_ack;
        fused_valid <= in_valid && is_ack && in_pkt.fused;
        if (in_valid && !is_ack) data_pkt <= in_pkt;
        if (in_valid && is_ack) begin
          pkt_t f;
          f = in_pkt;
          f.op = OP_TAACK;
          fused_pkt <= f;
          ack_valid <= 1'b1;
          ack_evt.tpc     <= in_pkt.dst_tpn;
          ack_evt.ack_psn <= in_pkt.ack_psn;
          ack_evt.is_sack <= (in_pkt.rtp_op == RTP_SACK);
          ack_evt.sack    <= in_pkt.sack;
          ack_evt.ece     <= in_pkt.ece;
        end
      end
    end
  end
endmodule
