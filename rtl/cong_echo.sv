// cong_echo: congestion-mark echo.
//
// Remembers, per TP Channel, that a data packet arrived carrying the forward
// congestion mark (FECN, set by a switch whose queue passed its watermark),
// and hands that mark to the next transport ACK sent on the channel as the
// congestion echo, after which the latch clears. At the sender the echoed
// mark drives the window's multiplicative decrease. The query is
// combinational and sees a mark arriving in the same cycle. Counts marks.
module cong_echo
  import urma_pkg::*;
#(
  parameter int unsigned NUM_TPC = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mark_valid,
  input  tpc_id_t     mark_tpc,
  input  logic        mark_fecn,
  input  tpc_id_t     q_tpc,
  output logic        q_ece,
  input  logic        clr_valid,
  input  tpc_id_t     clr_tpc,
  output logic [15:0] mark_cnt
);
  localparam int unsigned CW = $clog2(NUM_TPC);
  logic [NUM_TPC-1:0] ce;
  assign q_ece = ce[q_tpc[CW-1:0]] || (mark_valid && mark_fecn && mark_tpc == q_tpc);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ce <= '0; mark_cnt <= '0;
    end else begin
      if (clr_valid) ce[clr_tpc[CW-1:0]] <= 1'b0;
      if (mark_valid && mark_fecn) begin
        mark_cnt <= mark_cnt + 16'd1;
        if (!(clr_valid && clr_tpc == mark_tpc)) ce[mark_tpc[CW-1:0]] <= 1'b1;
      end
    end
  end
endmodule
