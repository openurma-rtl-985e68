// tpc_rx: per-TP-Channel receive logic.
//
// Keeps, per channel, the expected PSN (ePSN) and a 64-bit map of the packets
// held above it. For each arriving data packet:
//   PSN == ePSN            deliver it, advance ePSN, then drain any packets the
//                          reorder buffer holds for the following PSNs;
//   ePSN < PSN < ePSN+64   store it in the reorder buffer and mark the map
//                          (dropped unmarked if the buffer is full);
//   otherwise              duplicate or out of window: drop it.
// Every arrival, and every packet delivered by a drain, asks the ACK generator
// for an acknowledgement carrying the cumulative PSN (ePSN-1), the map as SACK
// bitmap and the congestion echo of the channel. Delivered ROL/UNO writes and
// sends ask for a fused transaction acknowledgement. Stores the congestion
// mark of each arrival in the echo element. One packet per cycle at most;
// the delivered packet and the ACK request leave together one cycle after
// acceptance. The 64-entry window matches the 64-slot retransmit ring.
module tpc_rx
  import urma_pkg::*;
#(
  parameter int unsigned NUM_TPC = 1024
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  pkt_t     in_pkt,
  output logic     out_valid,
  input  logic     out_ready,
  output pkt_t     out_pkt,
  output logic     ack_valid,
  input  logic     ack_ready,
  output ackreq_t  ack_req,
  // reorder buffer
  output logic     ro_ins_valid,
  output tpc_id_t  ro_ins_tpc,
  output pkt_t     ro_ins_pkt,
  input  logic     ro_ins_ok,
  output logic     ro_lk_valid,
  output tpc_id_t  ro_lk_tpc,
  output psn_t     ro_lk_psn,
  input  logic     ro_lk_hit,
  input  pkt_t     ro_lk_pkt,
  // congestion echo
  output logic     ce_mark_valid,
  output tpc_id_t  ce_tpc,
  output logic     ce_fecn,
  input  logic     ce_ece,
  output logic     ce_clr_valid,
  output logic [15:0] ooo_cnt,
  output logic [15:0] dup_cnt
);
  localparam int unsigned CW = $clog2(NUM_TPC);
  psn_t        epsn [NUM_TPC];
  logic [63:0] smap [NUM_TPC];

  logic          drain;
  logic [CW-1:0] dc;
  logic          free;
  assign free     = (!out_valid || out_ready) && (!ack_valid || ack_ready);
  assign in_ready = free && !drain;

  logic [CW-1:0] c;
  psn_t d;
  assign c = in_pkt.dst_tpn[CW-1:0];
  assign d = in_pkt.psn - epsn[c];

  logic take;
  assign take = in_valid && in_ready;

  // reorder buffer and congestion-echo connections
  assign ro_ins_valid = take && (d != '0) && (d < 24'd64);
  assign ro_ins_tpc   = tpc_id_t'(c);
  assign ro_ins_pkt   = in_pkt;
  assign ro_lk_valid  = drain && free;
  assign ro_lk_tpc    = tpc_id_t'(dc);
  assign ro_lk_psn    = epsn[dc];
  assign ce_mark_valid = take;
  assign ce_tpc        = drain ? tpc_id_t'(dc) : tpc_id_t'(c);
  assign ce_fecn       = in_pkt.fecn;
  assign ce_clr_valid  = (take && ((d == '0) || (d < 24'd64 && ro_ins_ok) || (d >= 24'd64))) ||
                         (drain && free);

  function automatic logic fuse(pkt_t p);
    return (p.sm == SM_ROL || p.sm == SM_UNO) && (p.op == OP_WRITE || p.op == OP_SEND);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pkt <= '0; ack_valid <= 1'b0; ack_req <= '0;
      drain <= 1'b0; dc <= '0; ooo_cnt <= '0; dup_cnt <= '0;
      for (int i = 0; i < int'(NUM_TPC); i++) begin epsn[i] <= '0; smap[i] <= '0; end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (ack_valid && ack_ready) ack_valid <= 1'b0;
      if (drain && free) begin
        // deliver the held packet for ePSN
        logic [63:0] nm;
        nm = smap[dc] >> 1;
        out_valid <= ro_lk_hit;
        out_pkt   <= ro_lk_pkt;
        epsn[dc]  <= epsn[dc] + 1'b1;
        smap[dc]  <= nm;
        ack_valid <= 1'b1;
        ack_req.hdr     <= ro_lk_pkt;
        ack_req.tpc     <= tpc_id_t'(dc);
        ack_req.ack_psn <= epsn[dc];
        ack_req.sack    <= nm;
        ack_req.ece     <= ce_ece;
        ack_req.fused   <= fuse(ro_lk_pkt);
        if (!nm[0]) drain <= 1'b0;
      end else if (take) begin
        ack_req.hdr <= in_pkt;
        ack_req.tpc <= tpc_id_t'(c);
        ack_req.ece <= ce_ece;
        if (d == '0) begin
          logic [63:0] nm;
          nm = smap[c] >> 1;
          out_valid <= 1'b1;
          out_pkt   <= in_pkt;
          epsn[c]   <= epsn[c] + 1'b1;
          smap[c]   <= nm;
          ack_valid <= 1'b1;
          ack_req.ack_psn <= in_pkt.psn;
          ack_req.sack    <= nm;
          ack_req.fused   <= fuse(in_pkt);
          if (nm[0]) begin drain <= 1'b1; dc <= c; end
        end else if (d < 24'd64) begin
          if (ro_ins_ok) begin
            smap[c]   <= smap[c] | (64'd1 << d[5:0]);
            ack_valid <= 1'b1;
            ack_req.ack_psn <= epsn[c] - 1'b1;
            ack_req.sack    <= smap[c] | (64'd1 << d[5:0]);
            ack_req.fused   <= 1'b0;
            ooo_cnt <= ooo_cnt + 16'd1;
          end
        end else begin
          ack_valid <= 1'b1;
          ack_req.ack_psn <= epsn[c] - 1'b1;
          ack_req.sack    <= smap[c];
          ack_req.fused   <= 1'b0;
          dup_cnt <= dup_cnt + 16'd1;
        end
      end
    end
  end
endmodule
