// jt_tab: per-Jetty state table (transaction-layer endpoint state).
//
// One 20-byte record per local Jetty (id, access token, completion-queue id,
// type, state, valid), the field list of the design's per-Jetty record. The
// control plane writes records through a single write port; NRD combinational
// read ports serve the Jetty scheduler (validity) and the completion generator
// (completion-queue id). Records reset to invalid. The record fields follow
// the design; direct indexing by Jetty id and the port count are this
// implementation's choice.
module jt_tab
  import urma_pkg::*;
#(
  parameter int unsigned NUM_JETTY = 1024,
  parameter int unsigned NRD       = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  jetty_id_t                wr_idx,
  input  jetty_rec_t               wr_rec,
  input  jetty_id_t  [NRD-1:0]     rd_idx,
  output jetty_rec_t [NRD-1:0]     rd_rec
);
  localparam int unsigned IW = $clog2(NUM_JETTY);
  jetty_rec_t tab [NUM_JETTY];
  logic [NUM_JETTY-1:0] vld;

  always_ff @(posedge clk) begin
    if (wr_en) tab[wr_idx[IW-1:0]] <= wr_rec;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     vld <= '0;
    else if (wr_en) vld[wr_idx[IW-1:0]] <= wr_rec.valid[0];
  end
  always_comb begin
    for (int i = 0; i < int'(NRD); i++) begin
      rd_rec[i] = vld[rd_idx[i][IW-1:0]] ? tab[rd_idx[i][IW-1:0]] : '0;
    end
  end
endmodule
