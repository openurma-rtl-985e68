// nth_b: network transport header builder.
//
// Writes the network header of every outgoing packet: the local compute-node
// address as source, the destination address (for reliable data, the remote
// address the TP table holds for the channel; for ACKs and responses the
// address already in the packet), and the frame length in words (full frame
// for reliable packets, the short bypass frame otherwise). One cycle, as in
// the design's TX path.
module nth_b
  import urma_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  cna_t     local_cna,
  input  logic     in_valid,
  output logic     in_ready,
  input  pkt_t     in_pkt,
  output logic     out_valid,
  input  logic     out_ready,
  output pkt_t     out_pkt,
  output tpc_id_t  tp_idx,
  input  tpc_cfg_t tp_cfg
);
  assign tp_idx   = in_pkt.src_tpn;
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
        p.src_cna = local_cna;
        if (in_pkt.tp_type == TP_RTP && in_pkt.rtp_op == RTP_DATA && tp_cfg.valid)
          p.dst_cna = tp_cfg.remote_cna;
        p.nwords = (in_pkt.tp_type == TP_UTP) ? 8'(BYP_WORDS) : 8'(PKT_WORDS);
        out_pkt <= p;
      end
    end
  end
endmodule
