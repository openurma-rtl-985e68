// jg_dispatch: target-side Jetty-Group dispatcher.
//
// A Jetty Group is a receive-side alias: SENDs addressed to the group's
// Jetty id are spread over up to MEMBERS member Jetties. GROUPS group
// records (8 members, about 80 B each with the policy and member list) are
// written through the configuration port and matched by content against the
// destination Jetty of every SEND. Three policies pick the member:
//   0 HASH  - member = jg_key of the packet modulo the member count
//   1 RR    - per-group rotating pointer
//   2 DEPTH - the member whose receive queue currently holds fewest entries
//             (queue depths come from the per-Jetty receive element through
//             MEMBERS combinational query ports)
// The destination Jetty is rewritten to the chosen member. A SEND to an
// unregistered id passes through unchanged. One cycle, registered output.
// Record layout and the tie rule of DEPTH (lowest index) are this design's.
module jg_dispatch
  import urma_pkg::*;
#(
  parameter int unsigned GROUPS  = 16,
  parameter int unsigned MEMBERS = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // group configuration
  input  logic                    cfg_valid,
  input  logic [$clog2(GROUPS)-1:0] cfg_idx,
  input  logic                    cfg_en,
  input  jetty_id_t               cfg_gid,
  input  logic [1:0]              cfg_policy,
  input  logic [3:0]              cfg_nmem,
  input  jetty_id_t [MEMBERS-1:0] cfg_mem,
  // SEND stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  pkt_t                    in_pkt,
  output logic                    out_valid,
  input  logic                    out_ready,
  output pkt_t                    out_pkt,
  // receive-queue depth queries
  output jetty_id_t [MEMBERS-1:0] dq_jetty,
  input  logic [7:0]              dq_depth [MEMBERS],
  output logic [15:0]             hit_cnt,
  output logic [2:0]              last_pick
);
  localparam int unsigned GW = $clog2(GROUPS);
  localparam int unsigned MW = $clog2(MEMBERS);

  logic                    g_en   [GROUPS];
  jetty_id_t               g_id   [GROUPS];
  logic [1:0]              g_pol  [GROUPS];
  logic [3:0]              g_n    [GROUPS];
  jetty_id_t [MEMBERS-1:0] g_mem  [GROUPS];
  logic [MW-1:0]           g_rr   [GROUPS];

  logic          hit;
  logic [GW-1:0] gi;
  always_comb begin
    hit = 1'b0;
    gi  = '0;
    for (int g = 0; g < int'(GROUPS); g++)
      if (!hit && g_en[g] && g_id[g] == in_pkt.dst_jetty) begin hit = 1'b1; gi = GW'(g); end
  end

  assign dq_jetty = g_mem[gi];

  logic [MW-1:0] pick;
  always_comb begin
    logic [7:0] best;
    pick = '0;
    best = 8'hFF;
    unique case (g_pol[gi])
      2'd1:    pick = g_rr[gi];
      2'd2: begin
        for (int m = 0; m < int'(MEMBERS); m++)
          if (m < int'(g_n[gi]) && dq_depth[m] < best) begin best = dq_depth[m]; pick = MW'(m); end
      end
      default: pick = MW'((32'(in_pkt.jg_key)) % ((g_n[gi] == 4'd0) ? 32'd1 : 32'(g_n[gi])));
    endcase
  end

  logic route;
  assign route    = in_valid && hit && in_pkt.op == OP_SEND && g_n[gi] != 4'd0;
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pkt <= '0; hit_cnt <= '0; last_pick <= '0;
      for (int g = 0; g < int'(GROUPS); g++) begin
        g_en[g] <= 1'b0; g_id[g] <= '0; g_pol[g] <= '0; g_n[g] <= '0; g_mem[g] <= '0; g_rr[g] <= '0;
      end
    end else begin
      if (cfg_valid) begin
        g_en[cfg_idx] <= cfg_en; g_id[cfg_idx] <= cfg_gid; g_pol[cfg_idx] <= cfg_policy;
        g_n[cfg_idx] <= cfg_nmem; g_mem[cfg_idx] <= cfg_mem; g_rr[cfg_idx] <= '0;
      end
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_pkt <= in_pkt;
          if (route) begin
            out_pkt.dst_jetty <= g_mem[gi][pick];
            hit_cnt   <= hit_cnt + 16'd1;
            last_pick <= 3'(pick);
            if (32'(g_rr[gi]) + 1 >= 32'(g_n[gi])) g_rr[gi] <= '0;
            else                                    g_rr[gi] <= g_rr[gi] + MW'(1);
          end
        end
      end
    end
  end
endmodule
