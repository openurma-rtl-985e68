// ord_tgt: target-side order tracker.
//
// In the target-ordered service mode (ROT) the target, not the initiator,
// enforces strong order: an SO request may start executing only when no
// earlier ordered (RO or SO) ROT request from the same initiator Jetty is
// still executing here. Initiator Jetties are tracked by a hashed key of
// (source host, source Jetty) into KEYS counters; a hash collision can only
// add waiting, never remove it. The counter rises when an ordered ROT request
// passes and falls on the execution-done event the response builder raises.
// A request that must wait is parked in a small side buffer (later requests
// of the same key queue behind it), so other initiators' traffic is not
// blocked; parked requests are released oldest first, ahead of new input.
// Responses and other modes pass straight through. One cycle unblocked.
// Hashing, buffer size and release rule are this implementation's choices.
module ord_tgt
  import urma_pkg::*;
#(
  parameter int unsigned KEYS = 1024,
  parameter int unsigned HOLD = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  pkt_t      in_pkt,
  output logic      out_valid,
  input  logic      out_ready,
  output pkt_t      out_pkt,
  input  logic      done_valid,
  input  pkt_t      done_pkt,
  output logic [15:0] park_cnt
);
  localparam int unsigned KW = $clog2(KEYS);
  localparam int unsigned HW = (HOLD > 1) ? $clog2(HOLD) : 1;

  logic [7:0]      busy [KEYS];
  pkt_t            hb   [HOLD];
  logic [HOLD-1:0] hv;
  logic [15:0]     hage [HOLD];
  logic [15:0]     age_ctr;

  function automatic logic [KW-1:0] key(pkt_t p);
    logic [31:0] h;
    h = {6'd0, p.src_cna, p.src_jetty} ^ ({6'd0, p.src_cna, p.src_jetty} >> KW);
    return h[KW-1:0];
  endfunction
  function automatic logic ordered(pkt_t p);
    return (p.sm == SM_ROT) && (p.eo != EO_NO) && !is_response(p.op);
  endfunction
  function automatic logic must_wait(pkt_t p, logic [7:0] cnt);
    return (p.sm == SM_ROT) && (p.eo == EO_SO) && !is_response(p.op) && (cnt != 8'd0);
  endfunction

  logic          rel_found;
  logic [HW-1:0] rel_idx;
  always_comb begin
    rel_found = 1'b0;
    rel_idx   = '0;
    for (int s = 0; s < int'(HOLD); s++) begin
      logic oldest;
      oldest = hv[s];
      for (int t = 0; t < int'(HOLD); t++) begin
        if (t != s && hv[t] && key(hb[t]) == key(hb[s]) && (hage[t] - hage[s]) >= 16'h8000)
          oldest = 1'b0;
      end
      if (!rel_found && oldest && !must_wait(hb[s], busy[key(hb[s])])) begin
        rel_found = 1'b1;
        rel_idx   = HW'(s);
      end
    end
  end

  logic key_parked, h_full;
  logic [HW-1:0] free_idx;
  always_comb begin
    key_parked = 1'b0;
    h_full     = 1'b1;
    free_idx   = '0;
    for (int s = int'(HOLD) - 1; s >= 0; s--) begin
      if (hv[s] && key(hb[s]) == key(in_pkt) && !is_response(in_pkt.op)) key_parked = 1'b1;
      if (!hv[s]) begin h_full = 1'b0; free_idx = HW'(s); end
    end
  end

  logic out_free, take_rel, take_in, park_in;
  assign out_free = !out_valid || out_ready;
  assign take_rel = out_free && rel_found;
  assign park_in  = in_valid && (key_parked || must_wait(in_pkt, busy[key(in_pkt)]));
  assign in_ready = park_in ? !h_full : (out_free && !rel_found);
  assign take_in  = in_valid && in_ready && !park_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pkt <= '0; hv <= '0; age_ctr <= '0; park_cnt <= '0;
      for (int k = 0; k < int'(KEYS); k++) busy[k] <= '0;
      for (int s = 0; s < int'(HOLD); s++) begin hb[s] <= '0; hage[s] <= '0; end
    end else begin
      pkt_t sent;
      logic sent_v, inc, dec;
      logic [KW-1:0] sk, dk;
      sent   = take_rel ? hb[rel_idx] : in_pkt;
      sent_v = take_rel || take_in;
      sk     = key(sent);
      dk     = key(done_pkt);
      inc    = sent_v && ordered(sent);
      dec    = done_valid && ordered(done_pkt) && busy[dk] != 8'd0;
      if (out_free) out_valid <= sent_v;
      if (sent_v) out_pkt <= sent;
      if (take_rel) hv[rel_idx] <= 1'b0;
      if (in_valid && in_ready && park_in) begin
        hv[free_idx] <= 1'b1; hb[free_idx] <= in_pkt; hage[free_idx] <= age_ctr;
        age_ctr <= age_ctr + 16'd1; park_cnt <= park_cnt + 16'd1;
      end
      if (inc && !(dec && dk == sk)) busy[sk] <= busy[sk] + 8'd1;
      if (dec && !(inc && dk == sk)) busy[dk] <= busy[dk] - 8'd1;
    end
  end
endmodule
