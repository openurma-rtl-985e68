// atom: atomic execution unit of the target.
//
// Executes the nine atomic operations on one 8-byte word: swap, load,
// store, fetch-and-add, fetch-and-subtract, fetch-and-and, -or, -xor and
// compare-and-swap (new value written only if the old value equals the
// compare operand). Every operation returns the value before modification
// in the data field of its result. The request is checked against the
// memory-region table with atomic permission; a failure returns
// ST_MR_FAULT. The read-modify-write holds the highest priority on the
// shared memory so no other engine can slip between its read and write.
// Timing: accept (0), read granted (1), data back (2), write granted and
// result registered (3); the next request is accepted at cycle 4, so the
// unit has an initiation interval of 4 cycles.
module atom
  import urma_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 65536
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_t        in_pkt,
  output logic        out_valid,
  input  logic        out_ready,
  output pkt_t        out_pkt,
  output mr_key_t     chk_key,
  output logic [31:0] chk_addr,
  output logic [15:0] chk_len,
  output logic [31:0] chk_token,
  output logic [2:0]  chk_kind,
  input  logic        chk_ok,
  output logic        mem_req,
  output logic        mem_we,
  output logic [$clog2(MEM_BYTES/8)-1:0] mem_addr,
  output logic [63:0] mem_wdata,
  input  logic        mem_gnt,
  input  logic        mem_rvalid,
  input  logic [63:0] mem_rdata,
  output logic [15:0] op_cnt
);
  localparam int unsigned AW = $clog2(MEM_BYTES / 8);
  typedef enum logic [1:0] { S_IDLE, S_RD, S_WAIT, S_WR } st_e;
  st_e  st;
  pkt_t p;
  logic [63:0] old_v, new_v;

  assign chk_key   = in_pkt.mr_key;
  assign chk_addr  = in_pkt.addr;
  assign chk_len   = 16'd8;
  assign chk_token = in_pkt.token;
  assign chk_kind  = 3'b100;

  function automatic logic [63:0] apply(atomic_op_e op, logic [63:0] o, logic [63:0] d, logic [63:0] c);
    unique case (op)
      AT_SWAP:  return d;
      AT_LOAD:  return o;
      AT_STORE: return d;
      AT_FADD:  return o + d;
      AT_FSUB:  return o - d;
      AT_FAND:  return o & d;
      AT_FOR:   return o | d;
      AT_FXOR:  return o ^ d;
      AT_CAS:   return (o == c) ? d : o;
      default:  return o;
    endcase
  endfunction

  assign in_ready  = (st == S_IDLE) && (!out_valid || out_ready);
  assign mem_req   = (st == S_RD) || (st == S_WR);
  assign mem_we    = (st == S_WR);
  assign mem_addr  = p.addr[AW+2:3];
  assign mem_wdata = new_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; p <= '0; out_valid <= 1'b0; out_pkt <= '0; op_cnt <= '0;
      old_v <= '0; new_v <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (in_valid && in_ready) begin
          p <= in_pkt;
          if (chk_ok) st <= S_RD;
          else begin
            out_valid <= 1'b1;
            out_pkt <= in_pkt;
            out_pkt.status <= ST_MR_FAULT;
            out_pkt.data <= '0;
          end
        end
        S_RD:   if (mem_gnt) st <= S_WAIT;
        S_WAIT: if (mem_rvalid) begin
          old_v <= mem_rdata;
          new_v <= apply(p.aop, mem_rdata, p.data, p.cmp);
          st <= S_WR;
        end
        S_WR: if (mem_gnt) begin
          out_valid <= 1'b1;
          out_pkt <= p;
          out_pkt.data <= old_v;
          out_pkt.status <= ST_OK;
          op_cnt <= op_cnt + 16'd1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
