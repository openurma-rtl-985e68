// tx_mux_tb: self-checking testbench of tx_mux.
//
// Checks round-robin fairness over four requesting inputs and a lone input passing through.
//
// How: stimulus is applied on the falling clock edge from tasks and the
// outputs are sampled on the rising edge into queues, which the checks then
// inspect. Latencies are counted in clock cycles from the rising edge that
// accepts the input to the rising edge that first sees the output valid.
// Interface: the device's own ports, driven directly; shared clock, reset,
// check counters and a watchdog come from tb_common.svh. The checked
// latencies are the design's stated per-stage numbers; the stimulus values,
// table contents and reduced sizes are this testbench's own choices.
`timescale 1ns/1ps
module tx_mux_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  logic [3:0] in_valid = '0, in_ready; pkt_t [3:0] in_pkt = '0; logic out_valid, out_ready = 1'b1; pkt_t out_pkt;
  pkt_t outs [$];
  always @(posedge clk) if (out_valid && out_ready) outs.push_back(out_pkt);
  function automatic pkt_t base_pkt(opcode_e op); pkt_t p; p = '0; p.op = op; return p; endfunction
  tx_mux dut (.*);

  initial begin
    pkt_t p;
    int seen [4];
    reset_dut();
    // all four inputs request together: each is served once per round
    @(negedge clk);
    for (int k = 0; k < 4; k++) begin p = base_pkt(OP_WRITE); p.tsn = 16'(k); in_pkt[k] = p; end
    in_valid = 4'hF;
    for (int n = 0; n < 8; n++) begin
      @(posedge clk); #1;
    end
    in_valid = '0;
    repeat (4) @(posedge clk);
    chk(outs.size() >= 8, "fully loaded output");
    for (int k = 0; k < 4; k++) seen[k] = 0;
    for (int k = 0; k < 8; k++) seen[outs[k].tsn[1:0]]++;
    for (int k = 0; k < 4; k++) chk(seen[k] == 2, $sformatf("input %0d served twice in 8", k));
    for (int k = 1; k < 8; k++) chk(outs[k].tsn != outs[k-1].tsn, "round robin rotates");
    // a single active input passes alone
    @(negedge clk); in_valid = 4'b0100; in_pkt[2].tsn = 16'd99;
    @(negedge clk); in_valid = '0;
    repeat (3) @(posedge clk);
    chk(outs[outs.size()-1].tsn == 16'd99, "single input passes");
    finish_tb();
  end
endmodule
