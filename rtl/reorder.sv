// reorder: packet-sequence reorder buffer (transport layer).
//
// Holds reliable packets that arrived ahead of their channel's expected PSN
// until the gap is filled, so the transport delivers byte-correct, in-PSN-
// order packets whatever the ordering mode of the applications sharing the
// channel. A shared pool of SLOTS entries, each tagged (channel, PSN) and
// searched associatively: one insert port (refused when full or already
// held) and one lookup port that returns and frees the entry for a given
// (channel, PSN) in the same cycle. This buffer is separate from the
// completion reorder buffer of the transaction layer. The shared associative
// pool and its size are this implementation's choices.
module reorder
  import urma_pkg::*;
#(
  parameter int unsigned SLOTS = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     ins_valid,
  input  tpc_id_t  ins_tpc,
  input  pkt_t     ins_pkt,
  output logic     ins_ok,
  input  logic     lk_valid,
  input  tpc_id_t  lk_tpc,
  input  psn_t     lk_psn,
  output logic     lk_hit,
  output pkt_t     lk_pkt,
  output logic [7:0] occupancy
);
  localparam int unsigned SW = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  logic [SLOTS-1:0] v;
  tpc_id_t tag_c [SLOTS];
  psn_t    tag_p [SLOTS];
  pkt_t    mem   [SLOTS];

  logic          dup, full;
  logic [SW-1:0] free_i, hit_i;
  always_comb begin
    dup = 1'b0; full = 1'b1; free_i = '0; lk_hit = 1'b0; hit_i = '0;
    for (int s = int'(SLOTS) - 1; s >= 0; s--) begin
      if (v[s] && tag_c[s] == ins_tpc && tag_p[s] == ins_pkt.psn) dup = 1'b1;
      if (!v[s]) begin full = 1'b0; free_i = SW'(s); end
      if (v[s] && tag_c[s] == lk_tpc && tag_p[s] == lk_psn) begin lk_hit = 1'b1; hit_i = SW'(s); end
    end
    lk_pkt = mem[hit_i];
    ins_ok = ins_valid && !full && !dup;
  end

  always_comb begin
    occupancy = '0;
    for (int s = 0; s < int'(SLOTS); s++) occupancy = occupancy + {7'd0, v[s]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      for (int s = 0; s < int'(SLOTS); s++) begin tag_c[s] <= '0; tag_p[s] <= '0; mem[s] <= '0; end
    end else begin
      if (lk_valid && lk_hit) v[hit_i] <= 1'b0;
      if (ins_ok) begin
        v[free_i]     <= 1'b1;
        tag_c[free_i] <= ins_tpc;
        tag_p[free_i] <= ins_pkt.psn;
        mem[free_i]   <= ins_pkt;
      end
    end
  end
endmodule
