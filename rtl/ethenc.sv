// ethenc: Ethernet encapsulation (store-and-forward framer).
//
// Adds the Ethernet header (MAC addresses derived from the compute-node
// addresses, the Unified Bus ethertype) and serialises the packet into 64-bit
// wire words at the byte-stream rate of 8 bytes per cycle, computing the
// CRC-32 frame check sequence over the words as it goes. A frame is
// transmitted only once it is fully assembled: nwords header/payload words
// followed by one FCS word (FCS in the low 32 bits), `last` on the FCS word.
// A full reliable frame is 10 words plus the FCS word, so the first wire word
// of a packet leaves 11 cycles after the packet is accepted: the 11-cycle
// encapsulation stage of the design's TX path. The frame buffer is single, so
// a new packet is taken once the previous frame has gone.
// The store-and-forward structure and the word layout are this
// implementation's choices; the design gives the stage's latency and its
// byte-stream nature.
module ethenc
  import urma_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  pkt_t   in_pkt,
  output logic   tx_valid,
  input  logic   tx_ready,
  output wword_t tx_word
);
  typedef enum logic [1:0] { S_IDLE, S_ASM, S_SEND } st_e;
  st_e         st;
  pkt_t        p;
  logic [3:0]  idx, nw;
  logic [31:0] crc;

  assign in_ready = (st == S_IDLE);

  always_comb begin
    tx_valid     = (st == S_SEND);
    tx_word.last = (idx == nw);
    tx_word.data = (idx == nw) ? {32'd0, ~crc} : pkt_word(p, 32'(idx));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; p <= '0; idx <= '0; nw <= '0; crc <= '1;
    end else begin
      case (st)
        S_IDLE: if (in_valid) begin
          pkt_t q;
          q         = in_pkt;
          q.dst_mac = cna_mac(in_pkt.dst_cna);
          q.src_mac = cna_mac(in_pkt.src_cna);
          q.etype   = UB_ETYPE;
          if (q.nwords == 8'd0 || q.nwords > 8'(PKT_WORDS)) q.nwords = 8'(PKT_WORDS);
          p   <= q;
          nw  <= q.nwords[3:0];
          crc <= crc32_word(32'hFFFF_FFFF, pkt_word(q, 0));
          idx <= 4'd1;
          st  <= S_ASM;
        end
        S_ASM: begin
          if (idx == nw) begin
            idx <= '0;
            st  <= S_SEND;
          end else begin
            crc <= crc32_word(crc, pkt_word(p, 32'(idx)));
            idx <= idx + 4'd1;
          end
        end
        S_SEND: if (tx_ready) begin
          if (idx == nw) st <= S_IDLE;
          idx <= idx + 4'd1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
