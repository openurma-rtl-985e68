// taack: transaction-layer response builder (TAACK and data responses).
//
// Turns the result of an executed request into the response sent back to
// the initiator: READ -> READ_RESP (data), ATOMIC -> ATOMIC_RESP (value
// before modification), WRITE and SEND -> TAACK, LOAD -> LOAD_RESP and
// STORE -> STORE_ACK. Source and destination host and Jetty are swapped; the
// sequence number, service mode, order tags and status are copied; the
// transport fields are cleared for the transmit transport to refill.
// In the fused-ack modes (ROL, and UNO) a reliable WRITE/SEND was already
// acknowledged at transaction level by the transport ACK, so no TAACK is
// sent here. Every result also raises a one-cycle execution-done event
// (with the original request) to the target order tracker. One cycle.
module taack
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
  output logic        done_valid,
  output pkt_t        done_pkt,
  output logic [15:0] fused_cnt
);
  function automatic opcode_e resp_op(opcode_e op);
    unique case (op)
      OP_READ:   return OP_READ_RESP;
      OP_ATOMIC: return OP_ATOMIC_RESP;
      OP_LOAD:   return OP_LOAD_RESP;
      OP_STORE:  return OP_STORE_ACK;
      default:   return OP_TAACK;
    endcase
  endfunction

  logic fused;
  assign fused = (in_pkt.tp_type == TP_RTP) && (in_pkt.op inside {OP_WRITE, OP_SEND}) &&
                 (in_pkt.sm inside {SM_ROL, SM_UNO});
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pkt <= '0; done_valid <= 1'b0; done_pkt <= '0; fused_cnt <= '0;
    end else begin
      done_valid <= in_valid && in_ready;
      if (in_valid && in_ready) done_pkt <= in_pkt;
      if (in_ready) begin
        out_valid <= in_valid && !fused;
        if (in_valid && fused) fused_cnt <= fused_cnt + 16'd1;
        if (in_valid) begin
          pkt_t r;
          r = '0;
          r.tp_type   = in_pkt.tp_type;
          r.dst_cna   = in_pkt.src_cna;
          r.op        = resp_op(in_pkt.op);
          r.aop       = in_pkt.aop;
          r.sm        = in_pkt.sm;
          r.eo        = in_pkt.eo;
          r.comp_ord  = in_pkt.comp_ord;
          r.src_jetty = in_pkt.dst_jetty;
          r.dst_jetty = in_pkt.src_jetty;
          r.tsn       = in_pkt.tsn;
          r.status    = in_pkt.status;
          r.addr      = in_pkt.addr;
          r.data      = (in_pkt.op inside {OP_READ, OP_ATOMIC, OP_LOAD}) ? in_pkt.data : 64'd0;
          r.ctx       = in_pkt.ctx;
          out_pkt <= r;
        end
      end
    end
  end
endmodule
