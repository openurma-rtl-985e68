// comp_notify_tee: completion notification tee.
//
// Passes each ordered completion on to the completion-queue writer and, in
// the same cycle it is handed over, broadcasts it as a one-cycle
// notification to the initiator-side schedulers: the Jetty scheduler (to
// retire outstanding requests and release a fence) and the initiator order
// tracker (to release strong-order requests). One cycle, registered.
module comp_notify_tee
  import urma_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  cqe_t in_cqe,
  output logic out_valid,
  input  logic out_ready,
  output cqe_t out_cqe,
  output logic cn_valid,
  output cqe_t cn_cqe
);
  assign in_ready = !out_valid || out_ready;
  assign cn_valid = out_valid && out_ready;
  assign cn_cqe   = out_cqe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_cqe <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_cqe <= in_cqe;
    end
  end
endmodule
