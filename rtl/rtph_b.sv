// rtph_b: reliable transport header builder.
//
// Completes the reliable transport header of a packet leaving the transport
// layer: the remote TP-Channel number from the TP table (the local number and
// PSN were set by tpc_tx), the acknowledge-request bit for data packets and
// the C-AQM bandwidth hint. Transport ACKs, built whole by the ACK generator,
// and bypass packets, which carry no reliable header, pass unchanged. One
// cycle, as in the design's TX path. The hint value (the channel's window in
// 256-byte units, saturated to 8 bits) is this implementation's choice; the
// design leaves the hint encoding vendor-defined.
module rtph_b
  import urma_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_t        in_pkt,
  output logic        out_valid,
  input  logic        out_ready,
  output pkt_t        out_pkt,
  output tpc_id_t     tp_idx,
  input  tpc_cfg_t    tp_cfg,
  input  logic [31:0] win
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
        if (in_pkt.tp_type == TP_RTP && in_pkt.rtp_op == RTP_DATA) begin
          p.dst_tpn = tp_cfg.remote_tpn;
          p.ack_req = 1'b1;
          p.fecn    = 1'b0;
          p.cc_hint = (win[31:8] > 24'd255) ? 8'hFF : win[15:8];
        end
        out_pkt <= p;
      end
    end
  end
endmodule
