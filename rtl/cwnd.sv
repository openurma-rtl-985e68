// cwnd: per-TP-Channel congestion window (AIMD).
//
// Admits a reliable data packet only if its channel has room: fewer than
// RETX_SLOTS packets unacknowledged (the retransmit ring must hold it) and
// the unacknowledged bytes plus this frame within the channel's window.
// Acknowledgements arrive as events from the receive side: each advances the
// channel's oldest-unacknowledged PSN; an acknowledgement carrying the
// congestion echo halves the window (multiplicative decrease, floor MIN_WIN),
// one without it adds AI_BYTES (additive increase, ceiling INIT_WIN). The
// window starts at 65,536 B and may fall to 4,096 B, the range the design
// reports. Non-data and bypass packets pass uncharged. While a packet is
// refused the element stalls (the stall count is exported). One cycle.
// Charging each packet its wire frame size (PKT_BYTES) and the increase step
// are this implementation's choices.
module cwnd
  import urma_pkg::*;
#(
  parameter int unsigned NUM_TPC    = 1024,
  parameter int unsigned RETX_SLOTS = 64,
  parameter int unsigned INIT_WIN   = 65536,
  parameter int unsigned MIN_WIN    = 4096,
  parameter int unsigned AI_BYTES   = 256,
  parameter int unsigned PKT_BYTES  = 88
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_t        in_pkt,
  output logic        out_valid,
  input  logic        out_ready,
  output pkt_t        out_pkt,
  input  logic        ack_valid,
  input  ack_evt_t    ack_evt,
  output logic [15:0] stall_cnt,
  output logic [15:0] md_cnt,
  output logic [31:0] win_probe      // window of channel 0, for observation
);
  localparam int unsigned CW = $clog2(NUM_TPC);
  logic [31:0] win [NUM_TPC];
  psn_t        una [NUM_TPC];
  psn_t        nxt [NUM_TPC];

  logic [CW-1:0] c;
  logic data, room;
  psn_t inflight;
  assign c        = in_pkt.src_tpn[CW-1:0];
  assign data     = (in_pkt.tp_type == TP_RTP) && (in_pkt.rtp_op == RTP_DATA);
  assign inflight = nxt[c] - una[c];
  assign room     = (32'(inflight) < RETX_SLOTS) &&
                    ((32'(inflight) + 1) * PKT_BYTES <= win[c]);
  assign in_ready = (!out_valid || out_ready) && (!data || room);
  assign win_probe = win[0];

  logic [CW-1:0] ac;
  assign ac = ack_evt.tpc[CW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pkt   <= '0;
      stall_cnt <= '0;
      md_cnt    <= '0;
      for (int i = 0; i < int'(NUM_TPC); i++) begin
        win[i] <= INIT_WIN; una[i] <= '0; nxt[i] <= '0;
      end
    end else begin
      if (!out_valid || out_ready) out_valid <= in_valid && in_ready;
      if (in_valid && in_ready) begin
        out_pkt <= in_pkt;
        if (data) nxt[c] <= in_pkt.psn + 1'b1;
      end
      if (in_valid && data && !room && (!out_valid || out_ready)) stall_cnt <= stall_cnt + 16'd1;
      if (ack_valid) begin
        psn_t adv, outst;
        adv   = ack_evt.ack_psn + 1'b1 - una[ac];
        outst = nxt[ac] - una[ac];
        if (adv != '0 && adv <= outst) una[ac] <= ack_evt.ack_psn + 1'b1;
        if (ack_evt.ece) begin
          win[ac] <= ((win[ac] >> 1) < MIN_WIN) ? MIN_WIN : (win[ac] >> 1);
          md_cnt  <= md_cnt + 16'd1;
        end else if (adv != '0 && adv <= outst) begin
          win[ac] <= (win[ac] + AI_BYTES > INIT_WIN) ? INIT_WIN : (win[ac] + AI_BYTES);
        end
      end
    end
  end
endmodule
