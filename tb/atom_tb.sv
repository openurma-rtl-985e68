// atom_tb: self-checking testbench of atom.
//
// Runs the atomic operations against a small memory model and checks old values, stored results, the MR fault path and the initiation interval of 4 cycles.
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
module atom_tb;
  import urma_pkg::*;
  localparam int WATCHDOG_CYCLES = 20000;
  `include "tb_common.svh"
  pkt_t in_pkt = '0, out_pkt;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  pkt_t got [$];
  int   got_t [$];
  int   t_in;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin got.push_back(out_pkt); got_t.push_back(cyc); end
  task automatic send(pkt_t p);
    @(negedge clk); in_valid = 1'b1; in_pkt = p;
    do @(posedge clk); while (!in_ready);
    t_in = cyc;
    #1 in_valid = 1'b0;
  endtask
  task automatic expect_n(int n);
    int g = 0;
    while (got.size() < n && g < 2000) begin @(posedge clk); g++; end
    chk(got.size() >= n, $sformatf("expected %0d outputs, got %0d", n, got.size()));
  endtask
  function automatic pkt_t base_pkt(opcode_e op);
    pkt_t p;
    p = '0; p.op = op; p.src_cna = 16'd1; p.dst_cna = 16'd2; p.src_jetty = 10'd3; p.dst_jetty = 10'd4;
    p.tsn = 16'd7; p.mr_key = 6'd1; p.addr = 32'h40; p.token = 32'h99; p.data = 64'h1234; p.len = 16'd8;
    return p;
  endfunction
  logic chk_ok, ok = 1'b1; mr_key_t chk_key; logic [31:0] chk_addr, chk_token; logic [15:0] chk_len; logic [2:0] chk_kind;
  logic mem_req, mem_we, mem_rvalid = 1'b0; logic [12:0] mem_addr; logic [63:0] mem_wdata, mem_rdata = '0; logic [15:0] op_cnt;
  logic mem_gnt = 1'b1;
  logic [63:0] mem [64];
  assign chk_ok = ok;
  always @(posedge clk) begin
    mem_rvalid <= mem_req && !mem_we;
    if (mem_req && !mem_we) mem_rdata <= mem[mem_addr[5:0]];
    if (mem_req && mem_we) mem[mem_addr[5:0]] <= mem_wdata;
  end
  atom dut (.*);

  initial begin
    pkt_t p;
    atomic_op_e ops [9] = '{AT_SWAP, AT_LOAD, AT_STORE, AT_FADD, AT_FSUB, AT_FAND, AT_FOR, AT_FXOR, AT_CAS};
    logic [63:0] ref_v, nv;
    int t0;
    reset_dut();
    mem[8] = 64'hF0; ref_v = 64'hF0;
    for (int k = 0; k < 9; k++) begin
      p = base_pkt(OP_ATOMIC); p.aop = ops[k]; p.addr = 32'h40; p.data = 64'h3C + 64'(k); p.cmp = ref_v;
      case (ops[k])
        AT_SWAP, AT_STORE: nv = p.data;  AT_LOAD: nv = ref_v;
        AT_FADD: nv = ref_v + p.data;    AT_FSUB: nv = ref_v - p.data;
        AT_FAND: nv = ref_v & p.data;    AT_FOR:  nv = ref_v | p.data;
        AT_FXOR: nv = ref_v ^ p.data;    default: nv = (ref_v == p.cmp) ? p.data : ref_v;
      endcase
      send(p); expect_n(k + 1);
      chk(got[k].data == ref_v && got[k].status == ST_OK, $sformatf("op %0d returns old value", k));
      chk(mem[8] == nv, $sformatf("op %0d stores result", k));
      ref_v = nv;
    end
    // back-to-back: one new operation every 4 cycles
    p = base_pkt(OP_ATOMIC); p.aop = AT_FADD; p.addr = 32'h48; p.data = 64'd1;
    fork
      begin send(p); t0 = t_in; send(p); chk(t_in - t0 == 4, $sformatf("II=4, got %0d", t_in - t0)); end
    join
    expect_n(11);
    chk(mem[9] == 64'd2, "two adds");
    ok = 1'b0; send(p); expect_n(12);
    chk(got[11].status == ST_MR_FAULT && mem[9] == 64'd2, "MR fault: no access");
    chk(op_cnt == 16'd11, "op count");
    finish_tb();
  end
endmodule
