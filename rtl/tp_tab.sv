// tp_tab: per-TP-Channel configuration table (transport-layer peer state).
//
// One entry per remote host: the remote compute-node address, the local and
// remote TP-Channel numbers, and the loss-recovery mode (selective or
// go-back-N). The dynamic per-channel fields of the design's 56-byte record
// (next PSN, expected PSN, SACK bitmap, last acked) live in the transport
// elements that update them every cycle (tpc_tx, tpc_rx, retrans, cwnd); this
// table keeps the fields the control plane sets. A channel is found from the
// destination host by direct mapping: channel index = low bits of the remote
// CNA, verified against the stored remote CNA. Writes are one per cycle;
// NRD combinational read ports.
module tp_tab
  import urma_pkg::*;
#(
  parameter int unsigned NUM_TPC = 1024,
  parameter int unsigned NRD     = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  tpc_id_t                wr_idx,
  input  tpc_cfg_t               wr_cfg,
  input  tpc_id_t  [NRD-1:0]     rd_idx,
  output tpc_cfg_t [NRD-1:0]     rd_cfg
);
  localparam int unsigned IW = $clog2(NUM_TPC);
  tpc_cfg_t tab [NUM_TPC];
  logic [NUM_TPC-1:0] vld;

  always_ff @(posedge clk) begin
    if (wr_en) tab[wr_idx[IW-1:0]] <= wr_cfg;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     vld <= '0;
    else if (wr_en) vld[wr_idx[IW-1:0]] <= wr_cfg.valid;
  end
  always_comb begin
    for (int i = 0; i < int'(NRD); i++) begin
      rd_cfg[i] = vld[rd_idx[i][IW-1:0]] ? tab[rd_idx[i][IW-1:0]] : '0;
    end
  end
endmodule
