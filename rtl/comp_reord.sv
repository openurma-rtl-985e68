// comp_reord: completion reorder window.
//
// Responses can return out of issue order (other lanes, retransmission,
// different execution times). A completion whose WR asked for in-order
// completion (comp_ord = 1) may only be reported once every earlier WR of
// the same Jetty has completed; other completions are reported at once.
// Per Jetty the element keeps the lowest not-yet-completed sequence number
// (base) and a WIN-bit map of completed numbers above it; the base slides
// forward over completed numbers. An in-order completion that arrives early
// is parked in a HOLD-entry side buffer (no head-of-line blocking for other
// Jetties) and released, lowest sequence number first, once base passes it.
// Released entries go out ahead of new input. One cycle when unblocked.
// Window and buffer sizes are this design's choice.
module comp_reord
  import urma_pkg::*;
#(
  parameter int unsigned NUM_JETTY = 1024,
  parameter int unsigned WIN       = 32,
  parameter int unsigned HOLD      = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  cqe_t        in_cqe,
  output logic        out_valid,
  input  logic        out_ready,
  output cqe_t        out_cqe,
  output logic [15:0] park_cnt
);
  localparam int unsigned HW = (HOLD > 1) ? $clog2(HOLD) : 1;

  tsn_t           base [NUM_JETTY];
  logic [WIN-1:0] done [NUM_JETTY];
  cqe_t           hb   [HOLD];
  logic [HOLD-1:0] hv;

  function automatic logic tsn_lt(tsn_t a, tsn_t b);   // a earlier than b
    tsn_t d;
    d = a - b;
    return d[TSN_W-1];
  endfunction

  logic          rel_found;
  logic [HW-1:0] rel_idx;
  always_comb begin
    rel_found = 1'b0;
    rel_idx   = '0;
    for (int s = 0; s < int'(HOLD); s++) begin
      logic lowest;
      lowest = hv[s] && tsn_lt(hb[s].tsn, base[hb[s].jetty]);
      for (int t = 0; t < int'(HOLD); t++)
        if (t != s && hv[t] && hb[t].jetty == hb[s].jetty && tsn_lt(hb[t].tsn, hb[s].tsn))
          lowest = 1'b0;
      if (!rel_found && lowest) begin rel_found = 1'b1; rel_idx = HW'(s); end
    end
  end

  logic h_full;
  logic [HW-1:0] free_idx;
  always_comb begin
    h_full   = 1'b1;
    free_idx = '0;
    for (int s = int'(HOLD) - 1; s >= 0; s--)
      if (!hv[s]) begin h_full = 1'b0; free_idx = HW'(s); end
  end

  jetty_id_t j;
  tsn_t      off;
  logic      park_in, out_free, take_rel, take_in, acc;
  assign j        = in_cqe.jetty;
  assign off      = in_cqe.tsn - base[j];
  assign out_free = !out_valid || out_ready;
  assign park_in  = in_cqe.comp_ord && off != '0;
  assign take_rel = out_free && rel_found;
  assign in_ready = park_in ? !h_full : (out_free && !rel_found);
  assign acc      = in_valid && in_ready;
  assign take_in  = acc && !park_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_cqe <= '0; hv <= '0; park_cnt <= '0;
      for (int k = 0; k < int'(NUM_JETTY); k++) begin base[k] <= '0; done[k] <= '0; end
      for (int s = 0; s < int'(HOLD); s++) hb[s] <= '0;
    end else begin
      if (out_free) out_valid <= take_rel || take_in;
      if (take_rel)      begin out_cqe <= hb[rel_idx]; hv[rel_idx] <= 1'b0; end
      else if (take_in)  out_cqe <= in_cqe;
      if (acc && park_in) begin
        hv[free_idx] <= 1'b1; hb[free_idx] <= in_cqe; park_cnt <= park_cnt + 16'd1;
      end
      if (acc) begin
        logic [WIN-1:0] m;
        int unsigned    n;
        m = done[j];
        if (32'(off) < WIN) m[off[$clog2(WIN)-1:0]] = 1'b1;
        n = 0;
        for (int b = 0; b < int'(WIN); b++)
          if (m[b] && n == 32'(b)) n = n + 1;
        done[j] <= (n >= WIN) ? '0 : (m >> n);
        base[j] <= base[j] + TSN_W'(n);
      end
    end
  end
endmodule
