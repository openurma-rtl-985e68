// doorbell_tb: self-checking testbench of doorbell.
//
// Checks one-cycle acceptance of work requests and rejection of bad opcodes and out-of-range Jetties.
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
module doorbell_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  function automatic wqe_t base_wqe(opcode_e op, int j);
    wqe_t w;
    w = '0; w.op = op; w.jetty = 10'(j); w.dst_cna = 16'd2; w.dst_jetty = 10'd5; w.sm = SM_ROL; w.addr = 32'h80; w.data = 64'h55; w.len = 16'd8;
    return w;
  endfunction
  logic db_valid = 1'b0, db_ready, out_valid, out_ready = 1'b1; wqe_t db_wqe = '0, out_wqe; logic [15:0] bad_cnt;
  wqe_t outs [$]; int ot [$];
  always @(posedge clk) if (out_valid && out_ready) begin outs.push_back(out_wqe); ot.push_back(cyc); end
  doorbell #(.NUM_JETTY(8)) dut (.*);

  initial begin
    int t0;
    reset_dut();
    @(negedge clk); db_valid = 1'b1; db_wqe = base_wqe(OP_WRITE, 3);
    @(posedge clk); t0 = cyc; #1 db_valid = 1'b0;
    repeat (2) @(posedge clk);
    chk(outs.size() == 1 && outs[0] == base_wqe(OP_WRITE, 3), "WQE forwarded");
    chk(ot[0] - t0 == 1, "1-cycle latency");
    @(negedge clk); db_valid = 1'b1; db_wqe = base_wqe(OP_LOAD, 3);
    @(negedge clk); db_wqe = base_wqe(OP_READ, 9);
    @(negedge clk); db_wqe = base_wqe(OP_ATOMIC, 1);
    @(negedge clk); db_valid = 1'b0;
    chk(bad_cnt == 16'd2, "bad opcode and out-of-range Jetty counted");
    repeat (2) @(posedge clk); chk(outs.size() == 2 && outs[1].op == OP_ATOMIC, "valid WQE passed");
    finish_tb();
  end
endmodule
