// ldst_bypass: load/store bypass engine.
//
// Carries CPU loads and stores to remote memory without the reliable
// transport: requests go out as short unreliable (UTP) frames that skip the
// Jetty scheduler, ordering, channel, window and retransmit stages. The
// remote address comes from an aperture mapping of the CPU address:
// addr[31:16] is the destination host (CNA) and addr[15:0] the byte address
// in its memory. Each request takes one of NUM_CTX one-shot contexts; the
// context number travels in the sequence-number field and is returned by
// the LOAD_RESP / STORE_ACK, which completes the CPU request (load data or
// store ack). A context that gets no answer within TIMEOUT cycles completes
// with ST_TIMEOUT, so the CPU never hangs on a lost frame.
//
// Pipeline (cycle 0 = CPU request presented and accepted):
//   1 capture + context allocation   2 aperture decode
//   3 transaction header build       4 unreliable transport header (utph_b)
//   5 network header + MACs          6-7 frame boundary setup
//   8 first wire word, then the remaining words cut-through with the
//     running CRC, FCS word last (6 header/data words + FCS).
// The stages advance together and stall only while the framer is busy.
// The 8-cycle first-flit latency follows the design; the stage split,
// aperture mapping, context count and timeout are this design's choices.
module ldst_bypass
  import urma_pkg::*;
#(
  parameter int unsigned NUM_CTX = 16,
  parameter int unsigned TIMEOUT = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cna_t        local_cna,
  // CPU request / response
  input  logic        cpu_req_valid,
  output logic        cpu_req_ready,
  input  logic        cpu_req_we,
  input  logic [31:0] cpu_req_addr,
  input  logic [63:0] cpu_req_wdata,
  output logic        cpu_resp_valid,
  output logic [63:0] cpu_resp_data,
  output status_e     cpu_resp_status,
  output logic [7:0]  cpu_resp_ctx,
  output logic [7:0]  cpu_req_ctx,      // context the accepted request took
  // frames to the wire
  output logic        tx_valid,
  input  logic        tx_ready,
  output wword_t      tx_word,
  // responses from the receive path
  input  logic        resp_valid,
  output logic        resp_ready,
  input  pkt_t        resp_pkt,
  output logic [15:0] timeout_cnt,
  output logic [15:0] sent_cnt
);
  localparam int unsigned CW = $clog2(NUM_CTX);

  // ------------------------------------------------------------ contexts
  logic [NUM_CTX-1:0] busy;
  logic [15:0]        age [NUM_CTX];
  logic          free_any, exp_any;
  logic [CW-1:0] free_idx, exp_idx;
  always_comb begin
    free_any = 1'b0; free_idx = '0; exp_any = 1'b0; exp_idx = '0;
    for (int c = 0; c < int'(NUM_CTX); c++) begin
      if (!free_any && !busy[c]) begin free_any = 1'b1; free_idx = CW'(c); end
      if (!exp_any && busy[c] && 32'(age[c]) >= TIMEOUT) begin exp_any = 1'b1; exp_idx = CW'(c); end
    end
  end

  // ------------------------------------------------------------ pipeline
  logic          v1, v2, v3, v5;
  logic          we1;
  logic [31:0]   a1;
  logic [63:0]   d1;
  logic [CW-1:0] c1;
  logic          we2;
  cna_t          dst2;
  logic [15:0]   ra2;
  logic [63:0]   d2;
  logic [CW-1:0] c2;
  pkt_t          p3, p5;
  logic          u_in_ready, u_out_valid;
  pkt_t          u_out_pkt;
  logic          f_ready, adv;

  // the stages shift together when the last stage can hand its frame over
  assign adv           = !v5 || f_ready;
  assign cpu_req_ready = adv && u_in_ready && free_any;

  utph_b u_utph (
    .clk, .rst_n,
    .in_valid (v3 && adv), .in_ready (u_in_ready), .in_pkt (p3),
    .out_valid(u_out_valid), .out_ready(adv), .out_pkt(u_out_pkt)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; v5 <= 1'b0;
      we1 <= 1'b0; a1 <= '0; d1 <= '0; c1 <= '0;
      we2 <= 1'b0; dst2 <= '0; ra2 <= '0; d2 <= '0; c2 <= '0;
      p3 <= '0; p5 <= '0; cpu_req_ctx <= '0;
    end else if (adv && u_in_ready) begin
      // stage 1: capture
      v1 <= cpu_req_valid && cpu_req_ready;
      if (cpu_req_valid && cpu_req_ready) begin
        we1 <= cpu_req_we; a1 <= cpu_req_addr; d1 <= cpu_req_wdata; c1 <= free_idx;
        cpu_req_ctx <= 8'(free_idx);
      end
      // stage 2: aperture decode
      v2 <= v1;
      we2 <= we1; dst2 <= a1[31:16]; ra2 <= a1[15:0]; d2 <= d1; c2 <= c1;
      // stage 3: transaction header
      v3 <= v2;
      if (v2) begin
        pkt_t q;
        q = '0;
        q.op      = we2 ? OP_STORE : OP_LOAD;
        q.sm      = SM_UNO;
        q.eo      = EO_NO;
        q.dst_cna = dst2;
        q.addr    = {16'd0, ra2};
        q.data    = we2 ? d2 : 64'd0;
        q.len     = 16'd8;
        q.tsn     = TSN_W'(c2);
        q.ctx     = 8'(c2);
        p3 <= q;
      end
      // stage 4 is the utph_b instance; stage 5: network header + MACs
      v5 <= u_out_valid;
      if (u_out_valid) begin
        pkt_t q;
        q = u_out_pkt;
        q.src_cna = local_cna;
        q.dst_mac = cna_mac(q.dst_cna);
        q.src_mac = cna_mac(local_cna);
        q.etype   = UB_ETYPE;
        p5 <= q;
      end
    end else if (f_ready) begin
      v5 <= 1'b0;
    end
  end

  // ------------------------------------------------------------ framer
  typedef enum logic [1:0] { F_IDLE, F_SET1, F_SET2, F_SEND } fst_e;
  fst_e        fst;
  pkt_t        fp;
  logic [3:0]  idx;
  logic [31:0] crc;
  assign f_ready = (fst == F_IDLE);

  always_comb begin
    tx_valid     = (fst == F_SEND);
    tx_word.last = (idx == 4'(BYP_WORDS));
    tx_word.data = (idx == 4'(BYP_WORDS)) ? {32'd0, ~crc} : pkt_word(fp, 32'(idx));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst <= F_IDLE; fp <= '0; idx <= '0; crc <= '1; sent_cnt <= '0;
    end else begin
      unique case (fst)
        F_IDLE: if (v5) begin fp <= p5; fst <= F_SET1; end
        F_SET1: fst <= F_SET2;
        F_SET2: begin fst <= F_SEND; idx <= '0; crc <= 32'hFFFF_FFFF; end
        F_SEND: if (tx_ready) begin
          if (idx == 4'(BYP_WORDS)) begin
            fst <= F_IDLE;
            sent_cnt <= sent_cnt + 16'd1;
          end else begin
            crc <= crc32_word(crc, pkt_word(fp, 32'(idx)));
          end
          idx <= idx + 4'd1;
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ completion
  logic [CW-1:0] rc;
  logic          rhit;
  assign rc         = resp_pkt.tsn[CW-1:0];
  assign rhit       = resp_valid && busy[rc];
  assign resp_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0; cpu_resp_valid <= 1'b0; cpu_resp_data <= '0; cpu_resp_status <= ST_OK;
      cpu_resp_ctx <= '0; timeout_cnt <= '0;
      for (int c = 0; c < int'(NUM_CTX); c++) age[c] <= '0;
    end else begin
      for (int c = 0; c < int'(NUM_CTX); c++) if (busy[c]) age[c] <= age[c] + 16'd1;
      cpu_resp_valid <= 1'b0;
      if (rhit) begin
        busy[rc] <= 1'b0;
        cpu_resp_valid  <= 1'b1;
        cpu_resp_data   <= resp_pkt.data;
        cpu_resp_status <= resp_pkt.status;
        cpu_resp_ctx    <= 8'(rc);
      end else if (exp_any) begin
        busy[exp_idx] <= 1'b0;
        cpu_resp_valid  <= 1'b1;
        cpu_resp_data   <= '0;
        cpu_resp_status <= ST_TIMEOUT;
        cpu_resp_ctx    <= 8'(exp_idx);
        timeout_cnt     <= timeout_cnt + 16'd1;
      end
      if (cpu_req_valid && cpu_req_ready) begin
        busy[free_idx] <= 1'b1;
        age[free_idx]  <= '0;
      end
    end
  end
endmodule
