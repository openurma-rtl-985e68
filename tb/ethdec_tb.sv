// ethdec_tb: self-checking testbench of ethdec.
//
// Feeds good and corrupted frames and checks packet rebuild, FCS rejection and the bypass frame length.
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
module ethdec_tb;
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
  logic rx_valid = 1'b0; wword_t rx_word = '0; logic [15:0] bad_cnt, ovf_cnt, good_cnt;
  task automatic frame(pkt_t p, bit corrupt);
    logic [31:0] crc;
    crc = '1;
    for (int k = 0; k < int'(p.nwords); k++) begin
      @(negedge clk); rx_valid = 1'b1; rx_word.data = pkt_word(p, k); rx_word.last = 1'b0;
      crc = crc32_word(crc, rx_word.data);
      if (corrupt && k == 5) rx_word.data[0] = ~rx_word.data[0];
    end
    @(negedge clk); rx_word.data = {32'd0, ~crc}; rx_word.last = 1'b1;
    @(negedge clk); rx_valid = 1'b0; rx_word = '0;
  endtask
  ethdec dut (.clk, .rst_n, .rx_valid, .rx_word, .out_valid, .out_ready, .out_pkt, .bad_cnt, .ovf_cnt, .good_cnt);

  initial begin
    pkt_t p;
    reset_dut();
    p = base_pkt(OP_WRITE); p.dst_mac = cna_mac(16'd2); p.src_mac = cna_mac(16'd1); p.etype = UB_ETYPE; p.nwords = 8'(PKT_WORDS); p.psn = 24'd3;
    frame(p, 0);
    repeat (3) @(posedge clk);
    chk(got.size() == 1 && got[0] == p, "full frame rebuilt");
    frame(p, 1);
    repeat (3) @(posedge clk);
    chk(got.size() == 1 && bad_cnt == 16'd1, "bad FCS dropped");
    p.tp_type = TP_UTP; p.nwords = 8'(BYP_WORDS); frame(p, 0);
    repeat (3) @(posedge clk);
    chk(got.size() == 2 && got[1].tp_type == TP_UTP && got[1].addr == p.addr, "bypass frame rebuilt");
    chk(good_cnt == 16'd2, "good count");
    finish_tb();
  end
endmodule
