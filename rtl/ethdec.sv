// ethdec: Ethernet decapsulation.
//
// Receives 64-bit wire words (no back-pressure: the wire cannot wait),
// rebuilds the packet from the frame's words (words a short bypass frame does
// not carry read as zero), and checks the frame: the word count announced in
// the header, the Unified Bus ethertype and the CRC-32 frame check sequence
// in the last word. Good frames go into a FIFO_DEPTH-packet output FIFO;
// bad frames, and frames that find the FIFO full, are dropped and counted.
// The packet leaves one cycle after its last word. Layout and FIFO depth are
// this implementation's choices.
module ethdec
  import urma_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx_valid,
  input  wword_t      rx_word,
  output logic        out_valid,
  input  logic        out_ready,
  output pkt_t        out_pkt,
  output logic [15:0] bad_cnt,
  output logic [15:0] ovf_cnt,
  output logic [15:0] good_cnt
);
  localparam int unsigned AW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;
  logic [PKT_WORDS*WORD_W-1:0] acc;
  logic [3:0]  widx;
  logic [31:0] crc;

  pkt_t          fifo [FIFO_DEPTH];
  logic [AW-1:0] rd, wr;
  logic [AW:0]   cnt;

  pkt_t    rp;
  logic    frame_ok;
  assign rp = pkt_t'(acc);
  // frame check happens when the FCS word arrives
  assign frame_ok = rx_valid && rx_word.last && (widx == rp.nwords[3:0]) && (widx != '0) &&
                    (rp.etype == UB_ETYPE) && (rx_word.data[31:0] == ~crc);

  logic push, pop;
  assign push      = frame_ok && (cnt != (AW+1)'(FIFO_DEPTH));
  assign pop       = out_valid && out_ready;
  assign out_valid = (cnt != '0);
  assign out_pkt   = fifo[rd];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; widx <= '0; crc <= '1;
      rd <= '0; wr <= '0; cnt <= '0;
      bad_cnt <= '0; ovf_cnt <= '0; good_cnt <= '0;
      for (int i = 0; i < int'(FIFO_DEPTH); i++) fifo[i] <= '0;
    end else begin
      if (rx_valid) begin
        if (rx_word.last) begin
          widx <= '0;
          acc  <= '0;
          crc  <= '1;
          if (!frame_ok)  bad_cnt <= bad_cnt + 16'd1;
          else if (!push) ovf_cnt <= ovf_cnt + 16'd1;
          else            good_cnt <= good_cnt + 16'd1;
        end else begin
          if (32'(widx) < PKT_WORDS) acc[(PKT_WORDS-1-32'(widx))*WORD_W +: WORD_W] <= rx_word.data;
          crc  <= crc32_word(crc, rx_word.data);
          widx <= widx + 4'd1;
        end
      end
      if (push) begin
        fifo[wr] <= rp;
        wr <= AW'((32'(wr) + 1) % FIFO_DEPTH);
      end
      if (pop) rd <= AW'((32'(rd) + 1) % FIFO_DEPTH);
      cnt <= cnt + (push ? 1 : 0) - (pop ? 1 : 0);
    end
  end
endmodule
