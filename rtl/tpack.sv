// tpack: transport acknowledgement generator.
//
// Builds the ACK packet for each request from the receive channel logic: a
// cumulative ACK, or a SACK when the bitmap of packets held above the
// cumulative point is non-empty; with the congestion echo bit; addressed back
// to the sending host and its TP Channel. In the fused-acknowledgement modes
// (ROL and UNO writes and sends) the same ACK also carries the transaction
// acknowledgement (fused bit, requester Jetty, TSN), saving the separate TAACK
// packet. The ACK itself is not sequenced and not retransmitted. One cycle.
module tpack
  import urma_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  ackreq_t in_req,
  output logic    out_valid,
  input  logic    out_ready,
  output pkt_t    out_pkt,
  output logic [15:0] sack_cnt
);
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pkt <= '0; sack_cnt <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        pkt_t a;
        a          = '0;
        a.tp_type  = TP_RTP;
        a.dst_cna  = in_req.hdr.src_cna;
        a.src_tpn  = in_req.tpc;
        a.dst_tpn  = in_req.hdr.src_tpn;
        a.rtp_op   = (in_req.sack != '0) ? RTP_SACK : RTP_ACK;
        a.ack_psn  = in_req.ack_psn;
        a.sack     = in_req.sack;
        a.ece      = in_req.ece;
        a.fused    = in_req.fused;
        if (in_req.fused) begin
          a.op        = OP_TAACK;
          a.src_jetty = in_req.hdr.dst_jetty;
          a.dst_jetty = in_req.hdr.src_jetty;
          a.tsn       = in_req.hdr.tsn;
          a.sm        = in_req.hdr.sm;
          a.eo        = in_req.hdr.eo;
          a.comp_ord  = in_req.hdr.comp_ord;
          a.status    = ST_OK;
        end
        out_pkt <= a;
        if (in_req.sack != '0) sack_cnt <= sack_cnt + 16'd1;
      end
    end
  end
endmodule
