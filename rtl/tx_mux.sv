// tx_mux: 4-input round-robin transmit multiplexer.
//
// Merges the packet streams that enter the transport layer (new work requests
// from the transaction header builder and responses from the target side)
// into one stream, one packet per handshake. The grant rotates: after input i
// wins, the search starts at i+1. Combinational (no added cycle), so the
// work-queue TX path keeps its stage count. NUM_IN = 4 as in the design;
// unused inputs are tied off by the parent.
module tx_mux
  import urma_pkg::*;
#(
  parameter int unsigned NUM_IN = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_IN-1:0]    in_valid,
  output logic [NUM_IN-1:0]    in_ready,
  input  pkt_t [NUM_IN-1:0]    in_pkt,
  output logic                 out_valid,
  input  logic                 out_ready,
  output pkt_t                 out_pkt
);
  localparam int unsigned IW = (NUM_IN > 1) ? $clog2(NUM_IN) : 1;
  logic [IW-1:0] ptr, gnt;
  logic          any;

  always_comb begin
    any = 1'b0;
    gnt = ptr;
    for (int k = 0; k < int'(NUM_IN); k++) begin
      logic [IW-1:0] idx;
      idx = IW'((32'(ptr) + 32'(k)) % NUM_IN);
      if (!any && in_valid[idx]) begin
        any = 1'b1;
        gnt = idx;
      end
    end
    out_valid = any;
    out_pkt   = in_pkt[gnt];
    in_ready  = '0;
    in_ready[gnt] = any && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (any && out_ready) ptr <= IW'((32'(gnt) + 1) % NUM_IN);
  end
endmodule
