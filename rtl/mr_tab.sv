// mr_tab: memory-region permission table.
//
// MR_ENTRIES records (base, length, access token, read/write/atomic
// permission), 64 entries as in the design after its timing-closure shrink.
// Each of NCHK combinational check ports takes a region key, an address, a
// length, a token and the access kind, and answers whether the access lies in
// the region, the token matches and the permission is granted. The token is
// enforced at memory-region granularity, as in the design. Direct indexing by
// key and the port count are this implementation's choice.
module mr_tab
  import urma_pkg::*;
#(
  parameter int unsigned MR_ENTRIES = 64,
  parameter int unsigned NCHK       = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  mr_key_t                 wr_key,
  input  mr_rec_t                 wr_rec,
  input  mr_key_t     [NCHK-1:0]  chk_key,
  input  logic [NCHK-1:0] [31:0]  chk_addr,
  input  logic [NCHK-1:0] [15:0]  chk_len,
  input  logic [NCHK-1:0] [31:0]  chk_token,
  input  logic [NCHK-1:0] [2:0]   chk_kind,   // one-hot {atomic, write, read}
  output logic        [NCHK-1:0]  chk_ok
);
  localparam int unsigned KW = (MR_ENTRIES > 1) ? $clog2(MR_ENTRIES) : 1;
  mr_rec_t tab [MR_ENTRIES];
  logic [MR_ENTRIES-1:0] vld;

  always_ff @(posedge clk) begin
    if (wr_en) tab[wr_key[KW-1:0]] <= wr_rec;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     vld <= '0;
    else if (wr_en) vld[wr_key[KW-1:0]] <= wr_rec.valid;
  end

  always_comb begin
    for (int i = 0; i < int'(NCHK); i++) begin
      mr_rec_t r;
      logic [32:0] end_a, end_r;
      logic perm;
      r     = tab[chk_key[i][KW-1:0]];
      end_a = {1'b0, chk_addr[i]} + {17'd0, chk_len[i]};
      end_r = {1'b0, r.base} + {1'b0, r.len};
      perm  = (chk_kind[i][0] & r.perm_r) | (chk_kind[i][1] & r.perm_w) | (chk_kind[i][2] & r.perm_a);
      chk_ok[i] = vld[chk_key[i][KW-1:0]] && perm && (chk_token[i] == r.token) &&
                  (chk_addr[i] >= r.base) && (end_a <= end_r);
    end
  end
endmodule
