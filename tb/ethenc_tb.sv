// ethenc_tb: self-checking testbench of ethenc.
//
// Checks the 11-cycle latency to the first wire word, word order, the FCS word and the short bypass frame.
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
module ethenc_tb;
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
  wword_t words [$]; int wt [$];
  logic tx_valid, tx_ready = 1'b1; wword_t tx_word;
  assign out_valid = 1'b0;
  always @(posedge clk) if (tx_valid && tx_ready) begin words.push_back(tx_word); wt.push_back(cyc); end
  function automatic pkt_t dut_pkt(pkt_t p); p.dst_mac = cna_mac(p.dst_cna); p.src_mac = cna_mac(p.src_cna); p.etype = UB_ETYPE; return p; endfunction
  ethenc dut (.clk, .rst_n, .in_valid, .in_ready, .in_pkt, .tx_valid, .tx_ready, .tx_word);

  initial begin
    pkt_t p;
    logic [31:0] crc;
    reset_dut();
    p = base_pkt(OP_WRITE); p.nwords = 8'(PKT_WORDS); p.dst_mac = 48'h1; p.psn = 24'd5;
    send(p);
    while (words.size() < 11) @(posedge clk);
    chk(wt[0] - t_in == 11, $sformatf("11-cycle latency to first word, got %0d", wt[0] - t_in));
    crc = 32'hFFFFFFFF;
    for (int k = 0; k < 10; k++) begin
      chk(words[k].data == pkt_word(dut_pkt(p), k) && !words[k].last, $sformatf("word %0d", k));
      crc = crc32_word(crc, words[k].data);
    end
    chk(words[10].last && words[10].data[31:0] == ~crc, "FCS word last");
    p.tp_type = TP_UTP; p.nwords = 8'(BYP_WORDS); send(p);
    while (words.size() < 18) @(posedge clk);
    chk(words[17].last && !words[16].last, "bypass frame is 6 words + FCS");
    finish_tb();
  end
endmodule
