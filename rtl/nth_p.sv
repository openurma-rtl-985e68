// nth_p: network transport header parser.
//
// Accepts a packet only if its network header names this controller as the
// destination (dst_cna == local_cna); others are dropped and counted. Routes
// by transport type: reliable packets (TP_RTP) to the reliable-transport
// parser, bypass packets (TP_UTP) to the bypass parser. One cycle.
module nth_p
  import urma_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  cna_t        local_cna,
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_t        in_pkt,
  output logic        rtp_valid,
  input  logic        rtp_ready,
  output logic        utp_valid,
  input  logic        utp_ready,
  output pkt_t        out_pkt,
  output logic [15:0] misroute_cnt
);
  logic for_us;
  assign for_us   = (in_pkt.dst_cna == local_cna);
  assign in_ready = !(rtp_valid && !rtp_ready) && !(utp_valid && !utp_ready);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rtp_valid <= 1'b0; utp_valid <= 1'b0; out_pkt <= '0; misroute_cnt <= '0;
    end else if (in_ready) begin
      rtp_valid <= in_valid && for_us && (in_pkt.tp_type == TP_RTP);
      utp_valid <= in_valid && for_us && (in_pkt.tp_type == TP_UTP);
      if (in_valid) out_pkt <= in_pkt;
      if (in_valid && !for_us) misroute_cnt <= misroute_cnt + 16'd1;
    end
  end
endmodule
