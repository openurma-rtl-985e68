// btah_b: base transaction header builder.
//
// Turns a scheduled work request into a packet: fills the base transaction
// header (opcode, atomic sub-opcode, service mode, execution order, fence and
// completion-order bits, source and destination Jetty, TSN, memory-region key,
// remote address, access token, payload length, Jetty-Group hash key), the
// <= 8-byte payload or atomic operand, the CAS compare operand, and the
// destination host address the TP Channel lookup will use. The transport
// fields stay zero for the transport elements to fill. One cycle, as in the
// design's TX path.
module btah_b
  import urma_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  wr_t   in_wr,
  output logic  out_valid,
  input  logic  out_ready,
  output pkt_t  out_pkt
);
  function automatic pkt_t build(wr_t r);
    pkt_t p;
    p           = '0;
    p.dst_cna   = r.w.dst_cna;
    p.tp_type   = TP_RTP;
    p.op        = r.w.op;
    p.aop       = r.w.aop;
    p.sm        = r.w.sm;
    p.eo        = r.w.eo;
    p.fence     = r.w.fence;
    p.comp_ord  = r.w.comp_ord;
    p.src_jetty = r.w.jetty;
    p.dst_jetty = r.w.dst_jetty;
    p.tsn       = r.tsn;
    p.mr_key    = r.w.mr_key;
    p.status    = ST_OK;
    p.addr      = r.w.addr;
    p.token     = r.w.token;
    p.data      = r.w.data;
    p.cmp       = r.w.cmp;
    p.len       = r.w.len;
    p.jg_key    = r.w.jg_key;
    return p;
  endfunction

  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pkt   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_pkt <= build(in_wr);
    end
  end
endmodule
