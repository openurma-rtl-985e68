// doorbell: entry point of the work-queue path.
//
// The CPU writes a complete work-queue entry into the controller's doorbell
// aperture over the on-chip bus (no DMA fetch). The element checks the entry
// (a work-queue opcode: WRITE, READ, SEND or ATOMIC; a Jetty id inside the
// table) and registers it towards the Jetty scheduler; malformed entries are
// dropped and counted. One cycle, matching the 1-cycle doorbell stage of the
// design's TX path. Valid/ready on both sides; the bus write is the input
// handshake. The one-write-per-entry bus format is this implementation's
// choice.
module doorbell
  import urma_pkg::*;
#(
  parameter int unsigned NUM_JETTY = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        db_valid,
  output logic        db_ready,
  input  wqe_t        db_wqe,
  output logic        out_valid,
  input  logic        out_ready,
  output wqe_t        out_wqe,
  output logic [15:0] bad_cnt
);
  logic ok;
  assign ok = (db_wqe.op inside {OP_WRITE, OP_READ, OP_SEND, OP_ATOMIC}) &&
              (32'(db_wqe.jetty) < NUM_JETTY);
  assign db_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_wqe   <= '0;
      bad_cnt   <= '0;
    end else if (db_ready) begin
      out_valid <= db_valid && ok;
      if (db_valid && ok) out_wqe <= db_wqe;
      if (db_valid && !ok) bad_cnt <= bad_cnt + 16'd1;
    end
  end
endmodule
