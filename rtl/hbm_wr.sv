// hbm_wr: memory-write engine of the target.
//
// Executes WRITE (reliable path) and STORE (load/store bypass path)
// requests. A WRITE is checked against the memory-region table (key, token,
// write permission, bounds); a STORE comes from the pre-authorised aperture.
// The payload (up to 8 bytes, len bytes from the low end; len 0 means 8) is
// written at addr with a byte mask. The result packet (status OK, or
// ST_MR_FAULT with memory untouched) goes on to the response builder.
// Timing: accept (cycle 0), write granted (>= cycle 1), result registered on
// the grant edge, so 2 cycles after accept without memory contention.
module hbm_wr
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
  output logic [$clog2(MEM_BYTES/8)-1:0] mem_addr,
  output logic [63:0] mem_wdata,
  output logic [7:0]  mem_be,
  input  logic        mem_gnt,
  output logic [15:0] fault_cnt
);
  localparam int unsigned AW = $clog2(MEM_BYTES / 8);
  typedef enum logic { S_IDLE, S_REQ } st_e;
  st_e  st;
  pkt_t p;
  logic ok;

  assign chk_key   = in_pkt.mr_key;
  assign chk_addr  = in_pkt.addr;
  assign chk_len   = (in_pkt.len == 16'd0 || in_pkt.len > 16'd8) ? 16'd8 : in_pkt.len;
  assign chk_token = in_pkt.token;
  assign chk_kind  = 3'b010;
  assign ok        = (in_pkt.op == OP_STORE) || chk_ok;

  assign in_ready  = (st == S_IDLE) && (!out_valid || out_ready);
  assign mem_req   = (st == S_REQ);
  assign mem_addr  = p.addr[AW+2:3];
  assign mem_wdata = p.data;
  assign mem_be    = (p.len == 16'd0 || p.len >= 16'd8) ? 8'hFF : 8'(8'hFF >> (4'd8 - 4'(p.len)));

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
            fault_cnt <= fault_cnt + 16'd1;
          end
        end
        S_REQ: if (mem_gnt) begin
          out_valid <= 1'b1;
          out_pkt <= p;
          out_pkt.status <= ST_OK;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
