// jrecv: per-Jetty receive queues for SEND.
//
// Each Jetty owns a queue of RQ_DEPTH received messages (payload, length,
// source Jetty). An arriving SEND is appended to its destination Jetty's
// queue and a result packet with status OK goes on to the response builder;
// if the queue is full the result carries ST_NO_RQ instead (receiver not
// ready). The host drains messages through the pop port (data valid the
// next cycle). The current depth of any Jetty is readable through MEMBERS
// combinational query ports, used by the queue-depth Jetty-Group policy.
// One cycle per SEND. Queue depth and the inline 8-byte payload are this
// design's choices.
module jrecv
  import urma_pkg::*;
#(
  parameter int unsigned NUM_JETTY = 1024,
  parameter int unsigned RQ_DEPTH  = 4,
  parameter int unsigned MEMBERS   = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_t        in_pkt,
  output logic        out_valid,
  input  logic        out_ready,
  output pkt_t        out_pkt,
  // host side
  input  logic        pop_valid,
  input  jetty_id_t   pop_jetty,
  output logic        pop_ok,
  output logic [63:0] pop_data,
  output jetty_id_t   pop_src,
  // depth queries
  input  jetty_id_t [MEMBERS-1:0] dq_jetty,
  output logic [7:0]  dq_depth [MEMBERS],
  output logic [15:0] norq_cnt
);
  localparam int unsigned DW = (RQ_DEPTH > 1) ? $clog2(RQ_DEPTH) : 1;

  logic [63:0] q_data [NUM_JETTY*RQ_DEPTH];
  jetty_id_t   q_src  [NUM_JETTY*RQ_DEPTH];
  logic [DW-1:0] hd [NUM_JETTY];
  logic [7:0]    cnt [NUM_JETTY];

  always_comb
    for (int m = 0; m < int'(MEMBERS); m++)
      dq_depth[m] = (32'(dq_jetty[m]) < NUM_JETTY) ? cnt[dq_jetty[m]] : 8'hFF;

  jetty_id_t j;
  logic full, pop_hit, push;
  assign j        = in_pkt.dst_jetty;
  assign full     = 32'(cnt[j]) >= RQ_DEPTH;
  assign in_ready = !out_valid || out_ready;
  assign push     = in_valid && in_ready && !full;
  assign pop_hit  = pop_valid && cnt[pop_jetty] != 8'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pkt <= '0; pop_ok <= 1'b0; pop_data <= '0; pop_src <= '0; norq_cnt <= '0;
      for (int k = 0; k < int'(NUM_JETTY); k++) begin hd[k] <= '0; cnt[k] <= '0; end
    end else begin
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_pkt <= in_pkt;
          out_pkt.status <= full ? ST_NO_RQ : ST_OK;
          if (full) norq_cnt <= norq_cnt + 16'd1;
        end
      end
      if (push) begin
        q_data[32'(j) * RQ_DEPTH + ((32'(hd[j]) + 32'(cnt[j])) % RQ_DEPTH)] <= in_pkt.data;
        q_src [32'(j) * RQ_DEPTH + ((32'(hd[j]) + 32'(cnt[j])) % RQ_DEPTH)] <= in_pkt.src_jetty;
      end
      pop_ok <= pop_hit;
      if (pop_hit) begin
        pop_data <= q_data[32'(pop_jetty) * RQ_DEPTH + 32'(hd[pop_jetty])];
        pop_src  <= q_src [32'(pop_jetty) * RQ_DEPTH + 32'(hd[pop_jetty])];
        hd[pop_jetty] <= DW'((32'(hd[pop_jetty]) + 1) % RQ_DEPTH);
      end
      if (push && !(pop_hit && pop_jetty == j))      cnt[j] <= cnt[j] + 8'd1;
      if (pop_hit && !(push && pop_jetty == j))      cnt[pop_jetty] <= cnt[pop_jetty] - 8'd1;
    end
  end
endmodule
