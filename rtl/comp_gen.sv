// comp_gen: completion generator.
//
// Converts each response that reaches the initiator (READ_RESP, TAACK,
// ATOMIC_RESP, and the transaction ack fused into a transport ACK) into a
// completion entry for the issuing Jetty: Jetty id, transaction sequence
// number, opcode, status, order tags and, for READ and atomics, the returned
// 8-byte value carried inline. The completion queue (JFC) bound to the Jetty
// is read from the Jetty table through a combinational read port. One cycle.
module comp_gen
  import urma_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  pkt_t       in_pkt,
  output logic       out_valid,
  input  logic       out_ready,
  output cqe_t       out_cqe,
  output jetty_id_t  jt_idx,
  input  jetty_rec_t jt_rec,
  output logic [15:0] cqe_cnt
);
  assign jt_idx   = in_pkt.dst_jetty;
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_cqe <= '0; cqe_cnt <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_cqe.jfc      <= jt_rec.jfc_id[7:0];
        out_cqe.jetty    <= in_pkt.dst_jetty;
        out_cqe.tsn      <= in_pkt.tsn;
        out_cqe.op       <= in_pkt.op;
        out_cqe.status   <= in_pkt.status;
        out_cqe.comp_ord <= in_pkt.comp_ord;
        out_cqe.sm       <= in_pkt.sm;
        out_cqe.eo       <= in_pkt.eo;
        out_cqe.data     <= in_pkt.data;
        cqe_cnt <= cqe_cnt + 16'd1;
      end
    end
  end
endmodule
