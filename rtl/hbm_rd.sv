// hbm_rd: memory-read engine of the target.
//
// Executes READ (reliable path) and LOAD (load/store bypass path) requests.
// A READ is first checked against the memory-region table (key, token,
// read permission, bounds) through a combinational check port; a LOAD comes
// from the pre-authorised load/store aperture and is not checked. The
// 8-byte word at addr is then read from on-NIC memory and returned in the
// data field of the result packet; a failed check returns status
// ST_MR_FAULT without touching memory.
// Timing: accept (cycle 0), memory request granted (>= cycle 1), data back
// one cycle after the grant, result registered the cycle after that, so a
// read with no memory contention yields its result 3 cycles after accept.
module hbm_rd
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
  // memory-region check
  output mr_key_t     chk_key,
  output logic [31:0] chk_addr,
  output logic [15:0] chk_len,
  output logic [31:0] chk_token,
  output logic [2:0]  chk_kind,
  input  logic        chk_ok,
  // memory port
  output logic        mem_req,
  output logic [$clog2(MEM_BYTES/8)-1:0] mem_addr,
  input  logic        mem_gnt,
  input  logic        mem_rvalid,
  input  logic [63:0] mem_rdata,
  output logic [15:0] fault_cnt
);
  localparam int unsigned AW = $clog2(MEM_BYTES / 8);
  typedef enum logic [1:0] { S_IDLE, S_REQ, S_WAIT } st_e;
  st_e  st;
  pkt_t p;
  logic ok;

  assign chk_key   = in_pkt.mr_key;
  assign chk_addr  = in_pkt.addr;
  assign chk_len   = 16'd8;
  assign chk_token = in_pkt.token;
  assign chk_kind  = 3'b001;
  assign ok        = (in_pkt.op == OP_LOAD) || chk_ok;

  assign in_ready = (st == S_IDLE) && (!out_valid || out_ready);
  assign mem_req  = (st == S_REQ);
  assign mem_addr = p.addr[AW+2:3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; p <= '0; out_valid <= 1'b0; out_pkt <= '0; fault_cnt <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (in_valid && in_ready) begin
          p <= in_pkt;
          if (ok) st <= S_REQ;
          else begin
            out_valid <= 1'b1;
            out_pkt <= in_pkt;
            out_pkt.status <= ST_MR_FAULT;
            out_pkt.data <= '0;
            fault_cnt <= fault_cnt + 16'd1;
          end
        end
        S_REQ:  if (mem_gnt) st <= S_WAIT;
        S_WAIT: if (mem_rvalid) begin
          out_valid <= 1'b1;
          out_pkt <= p;
          out_pkt.data <= mem_rdata;
          out_pkt.status <= ST_OK;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
