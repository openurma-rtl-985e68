// nic_mem: on-NIC memory with a three-port fixed-priority arbiter.
//
// Stands in for the host/HBM memory the target engines access: MEM_BYTES of
// storage held as 8-byte words (64 KB = 8192 words at the default). Port 0
// (atomic unit) has priority over port 1 (memory write), which has priority
// over port 2 (memory read); one access is granted per cycle. gnt is
// combinational; a granted read returns rdata with rvalid on the next cycle
// to the port that issued it. Writes use an 8-bit byte enable.
module nic_mem #(
  parameter int unsigned MEM_BYTES = 65536
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [2:0]  req,
  input  logic [2:0]  we,
  input  logic [$clog2(MEM_BYTES/8)-1:0] addr [3],
  input  logic [63:0] wdata [3],
  input  logic [7:0]  be    [3],
  output logic [2:0]  gnt,
  output logic [2:0]  rvalid,
  output logic [63:0] rdata
);
  localparam int unsigned WORDS = MEM_BYTES / 8;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [63:0] mem [WORDS];
  logic [1:0]  sel;

  always_comb begin
    gnt = '0;
    sel = 2'd0;
    if      (req[0]) begin gnt[0] = 1'b1; sel = 2'd0; end
    else if (req[1]) begin gnt[1] = 1'b1; sel = 2'd1; end
    else if (req[2]) begin gnt[2] = 1'b1; sel = 2'd2; end
  end

  logic [AW-1:0] a;
  assign a = addr[sel];

  always_ff @(posedge clk) begin
    if (|gnt && we[sel])
      for (int b = 0; b < 8; b++)
        if (be[sel][b]) mem[a][8*b +: 8] <= wdata[sel][8*b +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= '0; rdata <= '0;
    end else begin
      rvalid <= (|gnt && !we[sel]) ? gnt : 3'b000;
      if (|gnt && !we[sel]) rdata <= mem[a];
    end
  end
endmodule
