// utph_p: bypass transport header parser.
//
// Checks packets that arrive with the transport-bypass flag (TP_UTP): only
// load/store requests and their responses may use the bypass; anything else
// is dropped and counted. Requests go to the target data path, responses back
// to the load/store bypass engine. No transport state is touched. One cycle.
module utph_p
  import urma_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_t        in_pkt,
  output logic        req_valid,
  input  logic        req_ready,
  output logic        resp_valid,
  input  logic        resp_ready,
  output pkt_t        out_pkt,
  output logic [15:0] bad_cnt
);
  logic is_req, is_resp;
  assign is_req   = (in_pkt.op == OP_LOAD) || (in_pkt.op == OP_STORE);
  assign is_resp  = (in_pkt.op == OP_LOAD_RESP) || (in_pkt.op == OP_STORE_ACK);
  assign in_ready = !(req_valid && !req_ready) && !(resp_valid && !resp_ready);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_valid <= 1'b0; resp_valid <= 1'b0; out_pkt <= '0; bad_cnt <= '0;
    end else if (in_ready) begin
      req_valid  <= in_valid && is_req;
      resp_valid <= in_valid && is_resp;
      if (in_valid) out_pkt <= in_pkt;
      if (in_valid && !is_req && !is_resp) bad_cnt <= bad_cnt + 16'd1;
    end
  end
endmodule
