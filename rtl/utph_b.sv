// utph_b: unreliable / TP-bypass transport header builder.
//
// Marks a packet for the transport bypass used by the load/store path: sets
// the transport type to TP_UTP (the flag that tells the receiving controller
// to skip its transport state machine), clears every reliable-transport field
// (no PSN, no ACK request, no retransmission slot) and sets the short frame
// length, so the frame carries only the Ethernet, network and transaction
// headers and the payload word. One cycle; it is one of the five stages of the
// load/store bypass engine.
module utph_b
  import urma_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  pkt_t  in_pkt,
  output logic  out_valid,
  input  logic  out_ready,
  output pkt_t  out_pkt
);
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pkt   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        pkt_t p;
        p = in_pkt;
        p.tp_type  = TP_UTP;
        p.lane     = 2'd0;
        p.src_tpn  = '0;
        p.dst_tpn  = '0;
        p.psn      = '0;
        p.rtp_op   = RTP_DATA;
        p.ack_req  = 1'b0;
        p.ack_psn  = '0;
        p.sack     = '0;
        p.nwords   = 8'(BYP_WORDS);
        out_pkt <= p;
      end
    end
  end
endmodule
