// tpg: multi-path dispatcher (TP group lane select).
//
// Stamps the network lane each reliable packet takes. Unordered service mode
// (UNO) packets are sprayed round-robin over NUM_LANES lanes, since the
// transport reorder buffer at the receiver restores byte order; every other
// mode keeps one lane per TP Channel (lane = channel index modulo NUM_LANES)
// so its packets stay on a single path. Bypass packets use lane 0.
// Combinational (no added cycle); the lane counter advances on each sprayed
// packet. The lane count and the spreading rule are this implementation's
// choices: the design names the element and its purpose only.
module tpg
  import urma_pkg::*;
#(
  parameter int unsigned NUM_LANES = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  pkt_t  in_pkt,
  output logic  out_valid,
  input  logic  out_ready,
  output pkt_t  out_pkt,
  output logic [15:0] spray_cnt
);
  logic [1:0] rr;
  logic spray;
  assign spray     = (in_pkt.tp_type == TP_RTP) && (in_pkt.sm == SM_UNO);
  assign out_valid = in_valid;
  assign in_ready  = out_ready;
  always_comb begin
    out_pkt = in_pkt;
    if (in_pkt.tp_type == TP_UTP) out_pkt.lane = 2'd0;
    else if (spray)                out_pkt.lane = rr;
    else                           out_pkt.lane = 2'(32'(in_pkt.src_tpn) % NUM_LANES);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0;
      spray_cnt <= '0;
    end else if (in_valid && out_ready && spray) begin
      rr <= 2'((32'(rr) + 1) % NUM_LANES);
      spray_cnt <= spray_cnt + 16'd1;
    end
  end
endmodule
