// ord_ini: initiator-side order tracker.
//
// Gates strong-order (SO) requests of the initiator-ordered service mode
// (ROI): an SO request may leave only when no earlier ordered (RO or SO) ROI
// request of the same Jetty is still outstanding. It reads one per-Jetty
// counter, incremented when an ordered ROI request passes and decremented by
// the completion notification of such a request. A request that must wait is
// parked in a small side buffer rather than held at the head of the stream,
// so requests of other Jetties (and unordered ones) keep flowing; later
// requests of a Jetty that has a parked entry are parked behind it to keep the
// Jetty's issue order. Parked entries are released oldest first, ahead of new
// input.
//
// Timing: one cycle on the unblocked path (registered output), as in the
// design. The park buffer size and the release rule are this
// implementation's choices.
module ord_ini
  import urma_pkg::*;
#(
  parameter int unsigned NUM_JETTY = 1024,
  parameter int unsigned HOLD      = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  wr_t       in_wr,
  output logic      out_valid,
  input  logic      out_ready,
  output wr_t       out_wr,
  input  logic      cn_valid,
  input  cqe_t      cn_cqe,
  output logic [15:0] park_cnt
);
  localparam int unsigned JW = $clog2(NUM_JETTY);
  localparam int unsigned HW = (HOLD > 1) ? $clog2(HOLD) : 1;

  logic [7:0]       ro_out [NUM_JETTY];
  wr_t              hb     [HOLD];
  logic [HOLD-1:0]  hv;
  logic [15:0]      hage   [HOLD];
  logic [15:0]      age_ctr;

  function automatic logic ordered(wr_t r);
    return (r.w.sm == SM_ROI) && (r.w.eo != EO_NO);
  endfunction
  function automatic logic must_wait(wr_t r, logic [7:0] cnt);
    return (r.w.sm == SM_ROI) && (r.w.eo == EO_SO) && (cnt != 8'd0);
  endfunction

  // a parked slot may go if it is its Jetty's oldest parked entry and is no longer blocked
  logic          rel_found;
  logic [HW-1:0] rel_idx;
  always_comb begin
    rel_found = 1'b0;
    rel_idx   = '0;
    for (int s = 0; s < int'(HOLD); s++) begin
      logic oldest;
      oldest = hv[s];
      for (int t = 0; t < int'(HOLD); t++) begin
        if (t != s && hv[t] && hb[t].w.jetty == hb[s].w.jetty && (hage[t] - hage[s]) >= 16'h8000)
          oldest = 1'b0;
      end
      if (!rel_found && oldest && !must_wait(hb[s], ro_out[hb[s].w.jetty[JW-1:0]])) begin
        rel_found = 1'b1;
        rel_idx   = HW'(s);
      end
    end
  end

  logic in_jetty_parked, h_full;
  logic [HW-1:0] free_idx;
  always_comb begin
    in_jetty_parked = 1'b0;
    h_full   = 1'b1;
    free_idx = '0;
    for (int s = int'(HOLD) - 1; s >= 0; s--) begin
      if (hv[s] && hb[s].w.jetty == in_wr.w.jetty) in_jetty_parked = 1'b1;
      if (!hv[s]) begin h_full = 1'b0; free_idx = HW'(s); end
    end
  end

  logic out_free, take_rel, take_in, park_in;
  assign out_free = !out_valid || out_ready;
  assign take_rel = out_free && rel_found;
  assign park_in  = in_valid && (in_jetty_parked || must_wait(in_wr, ro_out[in_wr.w.jetty[JW-1:0]]));
  assign in_ready = park_in ? !h_full : (out_free && !rel_found);
  assign take_in  = in_valid && in_ready && !park_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_wr    <= '0;
      hv        <= '0;
      age_ctr   <= '0;
      park_cnt  <= '0;
      for (int j = 0; j < int'(NUM_JETTY); j++) ro_out[j] <= '0;
      for (int s = 0; s < int'(HOLD); s++) begin hb[s] <= '0; hage[s] <= '0; end
    end else begin
      wr_t sent;
      logic sent_v;
      sent   = take_rel ? hb[rel_idx] : in_wr;
      sent_v = take_rel || take_in;
      if (out_free) out_valid <= sent_v;
      if (sent_v) out_wr <= sent;
      if (take_rel) hv[rel_idx] <= 1'b0;
      if (in_valid && in_ready && park_in) begin
        hv[free_idx]   <= 1'b1;
        hb[free_idx]   <= in_wr;
        hage[free_idx] <= age_ctr;
        age_ctr        <= age_ctr + 16'd1;
        park_cnt       <= park_cnt + 16'd1;
      end
      for (int j = 0; j < int'(NUM_JETTY); j++) begin
        logic inc, dec;
        inc = sent_v && ordered(sent) && (sent.w.jetty[JW-1:0] == JW'(j));
        dec = cn_valid && (cn_cqe.jetty[JW-1:0] == JW'(j)) && (cn_cqe.sm == SM_ROI) &&
              (cn_cqe.eo != EO_NO) && (ro_out[j] != 8'd0);
        ro_out[j] <= ro_out[j] + (inc ? 8'd1 : 8'd0) - (dec ? 8'd1 : 8'd0);
      end
    end
  end
endmodule
