// dispatch_mux: 4-input round-robin dispatch multiplexer.
//
// Merges packet streams on the receive and execution side into one stream
// with a rotating grant (after input i wins, the search starts at i+1) and a
// registered output, one packet per cycle. Used twice: in front of the opcode
// router (reliable transactions, bypass requests, fused acknowledgements) and
// in front of the response builder (results of memory read, memory write,
// atomics and receive). NUM_IN = 4 as in the design.
module dispatch_mux
  import urma_pkg::*;
#(
  parameter int unsigned NUM_IN = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_IN-1:0] in_valid,
  output logic [NUM_IN-1:0] in_ready,
  input  pkt_t [NUM_IN-1:0] in_pkt,
  output logic              out_valid,
  input  logic              out_ready,
  output pkt_t              out_pkt
);
  localparam int unsigned IW = (NUM_IN > 1) ? $clog2(NUM_IN) : 1;
  logic [IW-1:0] ptr, gnt;
  logic any, take;
  always_comb begin
    any = 1'b0;
    gnt = ptr;
    for (int k = 0; k < int'(NUM_IN); k++) begin
      logic [IW-1:0] idx;
      idx = IW'((32'(ptr) + 32'(k)) % NUM_IN);
      if (!any && in_valid[idx]) begin any = 1'b1; gnt = idx; end
    end
  end
  assign take = any && (!out_valid || out_ready);
  always_comb begin
    in_ready = '0;
    in_ready[gnt] = take;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; out_valid <= 1'b0; out_pkt <= '0;
    end else begin
      if (!out_valid || out_ready) out_valid <= any;
      if (take) begin
        out_pkt <= in_pkt[gnt];
        ptr <= IW'((32'(gnt) + 1) % NUM_IN);
      end
    end
  end
endmodule
