// tpc_tx: per-TP-Channel transmit accounting.
//
// For each reliable packet, finds the TP Channel that serves the destination
// host (one extra lookup per outbound packet: channel index = low bits of the
// destination CNA, checked against the TP table) and draws the channel's next
// packet sequence number (PSN). The channel index goes out in src_tpn for the
// later transport stages. Packets of the load/store bypass (TP_UTP) and
// packets to a host with no configured channel are handled apart: bypass
// packets pass with no PSN; packets with no channel are dropped and counted.
// Any Jetty reaches any host through the shared channel pool, so no state is
// kept per (Jetty, host) pair. One cycle.
module tpc_tx
  import urma_pkg::*;
#(
  parameter int unsigned NUM_TPC = 1024
) (
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
  output logic [15:0] nochan_cnt
);
  localparam int unsigned CW = $clog2(NUM_TPC);
  psn_t psn_next [NUM_TPC];
  logic [CW-1:0] c;
  logic hit, byp;

  assign c        = in_pkt.dst_cna[CW-1:0];
  assign tp_idx   = tpc_id_t'(c);
  assign hit      = tp_cfg.valid && (tp_cfg.remote_cna == in_pkt.dst_cna);
  assign byp      = (in_pkt.tp_type == TP_UTP);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_pkt    <= '0;
      nochan_cnt <= '0;
      for (int i = 0; i < int'(NUM_TPC); i++) psn_next[i] <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid && (byp || hit);
      if (in_valid && byp) out_pkt <= in_pkt;
      if (in_valid && !byp && hit) begin
        pkt_t p;
        p         = in_pkt;
        p.src_tpn = tpc_id_t'(c);
        p.psn     = psn_next[c];
        p.rtp_op  = RTP_DATA;
        out_pkt   <= p;
        psn_next[c] <= psn_next[c] + 1'b1;
      end
      if (in_valid && !byp && !hit) nochan_cnt <= nochan_cnt + 16'd1;
    end
  end
endmodule
