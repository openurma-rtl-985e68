// cqe_stream: completion-queue writer.
//
// Writes completion entries into per-JFC rings of CQ_DEPTH entries
// (NUM_CQ rings; the JFC id is taken modulo NUM_CQ). Each ring has a
// producer and a consumer index; a full ring back-pressures the completion
// path. The host polls a ring through the poll port: if it is not empty the
// oldest entry is returned the next cycle with poll_ok and the consumer
// index advances. Ring sizes are this design's choice.
module cqe_stream
  import urma_pkg::*;
#(
  parameter int unsigned NUM_CQ   = 16,
  parameter int unsigned CQ_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  cqe_t        in_cqe,
  input  logic        poll_valid,
  input  logic [7:0]  poll_jfc,
  output logic        poll_ok,
  output cqe_t        poll_cqe,
  output logic [15:0] wr_cnt
);
  localparam int unsigned CW = $clog2(NUM_CQ);
  localparam int unsigned DW = $clog2(CQ_DEPTH);
  cqe_t        ring [NUM_CQ*CQ_DEPTH];
  logic [DW:0] pi [NUM_CQ];
  logic [DW:0] ci [NUM_CQ];

  logic [CW-1:0] wq, pq;
  logic full, pop;
  assign wq = in_cqe.jfc[CW-1:0];
  assign pq = poll_jfc[CW-1:0];
  assign full = (pi[wq] - ci[wq]) == (DW+1)'(CQ_DEPTH);
  assign in_ready = !full;
  assign pop = poll_valid && (pi[pq] != ci[pq]);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) ring[32'(wq) * CQ_DEPTH + 32'(pi[wq][DW-1:0])] <= in_cqe;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      poll_ok <= 1'b0; poll_cqe <= '0; wr_cnt <= '0;
      for (int q = 0; q < int'(NUM_CQ); q++) begin pi[q] <= '0; ci[q] <= '0; end
    end else begin
      if (in_valid && in_ready) begin
        pi[wq] <= pi[wq] + 1'b1;
        wr_cnt <= wr_cnt + 16'd1;
      end
      poll_ok <= pop;
      if (pop) begin
        poll_cqe <= ring[32'(pq) * CQ_DEPTH + 32'(ci[pq][DW-1:0])];
        ci[pq] <= ci[pq] + 1'b1;
      end
    end
  end
endmodule
