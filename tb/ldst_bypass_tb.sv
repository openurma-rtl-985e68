// ldst_bypass_tb: self-checking testbench of ldst_bypass.
//
// Checks the 8-cycle first-word latency of a CPU store, the short bypass frame, the LOAD response matched by context, and the timeout of an unanswered load.
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
module ldst_bypass_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  cna_t local_cna = 16'd9; logic cpu_req_valid = 1'b0, cpu_req_ready, cpu_req_we = 1'b0, cpu_resp_valid, tx_valid, tx_ready = 1'b1, resp_valid = 1'b0, resp_ready;
  logic [31:0] cpu_req_addr = '0; logic [63:0] cpu_req_wdata = '0, cpu_resp_data; status_e cpu_resp_status; logic [7:0] cpu_resp_ctx, cpu_req_ctx, ctx;
  wword_t tx_word; pkt_t resp_pkt = '0; logic [15:0] timeout_cnt, sent_cnt;
  wword_t words [$]; int wt [$]; logic [75:0] resps [$];
  always @(posedge clk) if (tx_valid && tx_ready) begin words.push_back(tx_word); wt.push_back(cyc); end
  always @(posedge clk) if (cpu_resp_valid) resps.push_back({cpu_resp_ctx, cpu_resp_data, cpu_resp_status});
  ldst_bypass #(.TIMEOUT(60)) dut (.*);

  initial begin
    int t0, n0;
    reset_dut();
    @(negedge clk); cpu_req_valid = 1'b1; cpu_req_we = 1'b1; cpu_req_addr = {16'd2, 16'h0040}; cpu_req_wdata = 64'hCAFE;
    @(posedge clk); t0 = cyc; #1 cpu_req_valid = 1'b0;
    while (words.size() < 7) @(posedge clk);
    chk(wt[0] - t0 == 8, $sformatf("first word at 8 cycles, got %0d", wt[0] - t0));
    chk(words[6].last && !words[5].last, "6 words + FCS");
    chk(words[2].data[47:32] == 16'd2 && words[2].data[63:48] == 16'd9, "destination and source node");
    @(negedge clk); cpu_req_valid = 1'b1; cpu_req_we = 1'b0; cpu_req_addr = {16'd2, 16'h0048};
    @(posedge clk); ctx = cpu_req_ctx; #1 cpu_req_valid = 1'b0;
    repeat (12) @(posedge clk);
    @(negedge clk); resp_valid = 1'b1; resp_pkt = '0; resp_pkt.op = OP_LOAD_RESP; resp_pkt.tsn = 16'(ctx); resp_pkt.data = 64'hD00D;
    @(negedge clk); resp_valid = 1'b0;
    repeat (2) @(posedge clk);
    chk(resps.size() == 1 && resps[0] == {8'(ctx), 64'hD00D, ST_OK}, "LOAD data returned by context");
    n0 = resps.size();
    while (resps.size() < 2) @(posedge clk);
    chk(resps[1][3:0] == ST_TIMEOUT && timeout_cnt == 16'd1, "unanswered store times out");
    chk(sent_cnt == 16'd2, "two frames sent");
    finish_tb();
  end
endmodule
