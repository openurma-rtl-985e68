// nic_pair: two NICs joined by a behavioural wire/switch model (testbench only).
//
// Behavioural model. NIC A (node address 1) and NIC B (node address 2) are
// connected back to back. Each direction of the wire collects whole frames
// into a queue and replays them to the far receiver after WIRE_DELAY cycles,
// one word per cycle. Knobs driven by the enclosing testbench:
//   drop_a2b    - number of following A->B data frames to discard (loss)
//   mark_a2b    - set FECN on following A->B reliable data frames, the way a
//                 switch with a queue over its watermark does, and re-compute
//                 the FCS
//   hold_b_tx   - hold NIC B's transmit port not-ready
//   swap_a2b    - hold the next A->B frame back and send it after the one
//                 that follows it (reordering)
// Both NICs are exposed through hierarchical names a.* and b.* ports wired
// to testbench-driven signals declared here.
module nic_pair
  import urma_pkg::*;
#(
  parameter int unsigned NUM_JETTY  = 1024,
  parameter int unsigned NUM_TPC    = 1024,
  parameter int unsigned INIT_WIN   = 65536,
  parameter int unsigned MIN_WIN    = 4096,
  parameter int unsigned RTO_BASE   = 4096,
  parameter int unsigned LS_TIMEOUT = 4096,
  parameter int unsigned WIRE_DELAY = 20
) (
  input logic clk,
  input logic rst_n
);
  // ---------------------------------------------------- per-NIC host signals
  logic        jt_wr_en [2];
  logic [9:0]  jt_wr_idx [2];
  jetty_rec_t  jt_wr_rec [2];
  logic        tp_wr_en [2];
  logic [9:0]  tp_wr_idx [2];
  tpc_cfg_t    tp_wr_cfg [2];
  logic        mr_wr_en [2];
  logic [5:0]  mr_wr_key [2];
  mr_rec_t     mr_wr_rec [2];
  logic        jg_cfg_valid [2];
  logic [3:0]  jg_cfg_idx [2];
  logic        jg_cfg_en [2];
  logic [9:0]  jg_cfg_gid [2];
  logic [1:0]  jg_cfg_policy [2];
  logic [3:0]  jg_cfg_nmem [2];
  logic [79:0] jg_cfg_mem [2];
  logic        db_valid [2], db_ready [2];
  wqe_t        db_wqe [2];
  logic        poll_valid [2], poll_ok [2];
  logic [7:0]  poll_jfc [2];
  logic [$bits(cqe_t)-1:0] poll_cqe [2];
  logic        rq_pop_valid [2], rq_pop_ok [2];
  logic [9:0]  rq_pop_jetty [2];
  logic [63:0] rq_pop_data [2];
  logic        ls_req_valid [2], ls_req_ready [2], ls_req_we [2];
  logic [31:0] ls_req_addr [2];
  logic [63:0] ls_req_wdata [2];
  logic [7:0]  ls_req_ctx [2], ls_resp_ctx [2];
  logic        ls_resp_valid [2];
  logic [63:0] ls_resp_data [2];
  logic [3:0]  ls_resp_status [2];
  logic [5:0]  stat_sel [2];
  logic [31:0] stat_val [2];
  logic        tx_ready [2];
  assign tx_ready[0] = 1'b1;
  assign tx_ready[1] = !hold_b_tx;
  logic        tx_valid [2], tx_last [2], rx_valid [2], rx_last [2];
  logic [63:0] tx_data [2], rx_data [2];

  logic hold_b_tx = 1'b0;   // back-pressure B's transmit port
  int drop_a2b = 0;
  int mark_a2b = 0;
  int swap_a2b = 0;
  int dropped = 0, marked = 0, swapped = 0;

  for (genvar n = 0; n < 2; n++) begin : g_nic
    urma_nic #(.NUM_JETTY(NUM_JETTY), .NUM_TPC(NUM_TPC), .INIT_WIN(INIT_WIN), .MIN_WIN(MIN_WIN),
               .RTO_BASE(RTO_BASE), .LS_TIMEOUT(LS_TIMEOUT)) u_nic (
      .clk, .rst_n, .local_cna(16'(n + 1)),
      .jt_wr_en(jt_wr_en[n]), .jt_wr_idx(jt_wr_idx[n]), .jt_wr_rec(jt_wr_rec[n]),
      .tp_wr_en(tp_wr_en[n]), .tp_wr_idx(tp_wr_idx[n]), .tp_wr_cfg(tp_wr_cfg[n]),
      .mr_wr_en(mr_wr_en[n]), .mr_wr_key(mr_wr_key[n]), .mr_wr_rec(mr_wr_rec[n]),
      .jg_cfg_valid(jg_cfg_valid[n]), .jg_cfg_idx(jg_cfg_idx[n]), .jg_cfg_en(jg_cfg_en[n]),
      .jg_cfg_gid(jg_cfg_gid[n]), .jg_cfg_policy(jg_cfg_policy[n]), .jg_cfg_nmem(jg_cfg_nmem[n]),
      .jg_cfg_mem(jg_cfg_mem[n]),
      .db_valid(db_valid[n]), .db_ready(db_ready[n]), .db_wqe(db_wqe[n]),
      .poll_valid(poll_valid[n]), .poll_jfc(poll_jfc[n]), .poll_ok(poll_ok[n]), .poll_cqe(poll_cqe[n]),
      .rq_pop_valid(rq_pop_valid[n]), .rq_pop_jetty(rq_pop_jetty[n]), .rq_pop_ok(rq_pop_ok[n]),
      .rq_pop_data(rq_pop_data[n]),
      .ls_req_valid(ls_req_valid[n]), .ls_req_ready(ls_req_ready[n]), .ls_req_we(ls_req_we[n]),
      .ls_req_addr(ls_req_addr[n]), .ls_req_wdata(ls_req_wdata[n]), .ls_req_ctx(ls_req_ctx[n]),
      .ls_resp_valid(ls_resp_valid[n]), .ls_resp_data(ls_resp_data[n]),
      .ls_resp_status(ls_resp_status[n]), .ls_resp_ctx(ls_resp_ctx[n]),
      .tx_valid(tx_valid[n]), .tx_ready(tx_ready[n]), .tx_data(tx_data[n]), .tx_last(tx_last[n]),
      .rx_valid(rx_valid[n]), .rx_data(rx_data[n]), .rx_last(rx_last[n]),
      .stat_sel(stat_sel[n]), .stat_val(stat_val[n]));
  end

  // ---------------------------------------------------- wire / switch model
  typedef logic [64:0] fw_t;                 // {last, data}
  fw_t  q [2][$];                            // words queued per direction (towards NIC d)
  int   rel [2][$];                          // release cycle per queued frame start
  fw_t  cur [2][$];                          // frame being collected from NIC (1-d)
  fw_t  held [$];                            // A->B frame held back for reordering
  int   now = 0;
  always @(posedge clk) now <= now + 1;

  function automatic void push_frame(int d, fw_t f [$]);
    foreach (f[i]) q[d].push_back(f[i]);
    rel[d].push_back(now + int'(WIRE_DELAY));
  endfunction

  // frames travelling from NIC s to NIC d = 1-s
  always @(posedge clk) begin
    for (int s = 0; s < 2; s++) begin
      if (rst_n && tx_valid[s] && tx_ready[s]) begin
        cur[s].push_back({tx_last[s], tx_data[s]});
        if (tx_last[s]) begin
          fw_t f [$];
          logic [63:0] w6;
          f = cur[s];
          cur[s].delete();
          if (s == 0 && f.size() == 11 && f[6][19:18] == 2'd0) begin   // reliable data frame (rtp_op = DATA)
            if (drop_a2b > 0) begin
              drop_a2b--; dropped++;
              continue;
            end
            if (mark_a2b > 0) begin
              logic [31:0] crc;
              mark_a2b--; marked++;
              w6 = f[6][63:0];
              w6[16] = 1'b1;                                  // FECN
              f[6] = {1'b0, w6};
              crc = 32'hFFFF_FFFF;
              for (int i = 0; i < 10; i++) crc = crc32_word(crc, f[i][63:0]);
              f[10] = {1'b1, 32'd0, ~crc};
            end
            if (swap_a2b > 0 && held.size() == 0) begin
              swap_a2b--; swapped++;
              held = f;
              continue;
            end
          end
          push_frame(1 - s, f);
          if (s == 0 && held.size() != 0 && f.size() == 11) begin
            push_frame(1, held);
            held.delete();
          end
        end
      end
    end
  end

  // replay towards each receiver
  int remaining [2] = '{0, 0};
  always @(posedge clk) begin
    for (int d = 0; d < 2; d++) begin
      rx_valid[d] <= 1'b0;
      if (rst_n && q[d].size() != 0 && (remaining[d] != 0 || (rel[d].size() != 0 && rel[d][0] <= now))) begin
        fw_t w;
        w = q[d].pop_front();
        if (remaining[d] == 0) void'(rel[d].pop_front());
        remaining[d] = w[64] ? 0 : 1;
        rx_valid[d] <= 1'b1;
        rx_data[d]  <= w[63:0];
        rx_last[d]  <= w[64];
      end
    end
  end
endmodule
