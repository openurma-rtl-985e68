// dispatch: opcode router of the target and completion side.
//
// Steers each transaction packet by opcode: READ and LOAD to the memory-read
// element, WRITE and STORE to the memory-write element, ATOMIC to the atomic
// unit, SEND to the Jetty-Group dispatcher and per-Jetty receive, READ_RESP /
// TAACK / ATOMIC_RESP to the completion generator, and LOAD_RESP / STORE_ACK
// back to the load/store bypass engine. Anything else is dropped and counted.
// Combinational: the input is ready when the selected output is.
module dispatch
  import urma_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_t        in_pkt,
  output logic [5:0]  out_valid,   // 0 rd, 1 wr, 2 atomic, 3 send, 4 completion, 5 bypass response
  input  logic [5:0]  out_ready,
  output pkt_t        out_pkt,
  output logic [15:0] bad_cnt
);
  logic [5:0] sel;
  always_comb begin
    sel = '0;
    unique case (in_pkt.op)
      OP_READ, OP_LOAD:                       sel[0] = 1'b1;
      OP_WRITE, OP_STORE:                     sel[1] = 1'b1;
      OP_ATOMIC:                              sel[2] = 1'b1;
      OP_SEND:                                sel[3] = 1'b1;
      OP_READ_RESP, OP_TAACK, OP_ATOMIC_RESP: sel[4] = 1'b1;
      OP_LOAD_RESP, OP_STORE_ACK:             sel[5] = 1'b1;
      default:                                sel = '0;
    endcase
  end
  assign out_valid = in_valid ? sel : '0;
  assign out_pkt   = in_pkt;
  assign in_ready  = (sel == '0) ? 1'b1 : |(sel & out_ready);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bad_cnt <= '0;
    else if (in_valid && sel == '0) bad_cnt <= bad_cnt + 16'd1;
  end
endmodule
