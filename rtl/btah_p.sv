// btah_p: base transaction header parser.
//
// Checks the transaction header of each packet the transport delivers: the
// opcode must be a work-queue request (WRITE, READ, SEND, ATOMIC), or a
// response to one (READ_RESP, TAACK, ATOMIC_RESP), and a request's
// destination Jetty must exist on this controller. Packets that fail are
// dropped and counted. One cycle.
module btah_p
  import urma_pkg::*;
#(
  parameter int unsigned NUM_JETTY = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_t        in_pkt,
  output logic        out_valid,
  input  logic        out_ready,
  output pkt_t        out_pkt,
  output logic [15:0] bad_cnt
);
  logic req, resp, ok;
  assign req  = in_pkt.op inside {OP_WRITE, OP_READ, OP_SEND, OP_ATOMIC};
  assign resp = in_pkt.op inside {OP_READ_RESP, OP_TAACK, OP_ATOMIC_RESP};
  assign ok   = resp || (req && 32'(in_pkt.dst_jetty) < NUM_JETTY);
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pkt <= '0; bad_cnt <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid && ok;
      if (in_valid) out_pkt <= in_pkt;
      if (in_valid && !ok) bad_cnt <= bad_cnt + 16'd1;
    end
  end
endmodule
