// jsched: Jetty scheduler.
//
// Holds a small work queue per Jetty, picks the next Jetty round-robin, gives
// the request the Jetty's next transaction sequence number (TSN) and enforces
// the Fence: a fenced request leaves only when every earlier request of its
// Jetty has completed. A fenced head that must wait sets the Jetty's fence
// latch and the scan skips that Jetty, so other Jetties keep issuing (no
// head-of-line blocking across Jetties). Completion notifications from the
// completion tee decrement the per-Jetty outstanding counter and clear the
// latch when it reaches zero.
//
// Timing: 5 cycles from an accepted entry to a valid output on an idle
// scheduler (enqueue, snapshot of the eligible set, round-robin pick, queue
// read, gate-and-emit), the 5-cycle stage of the design's TX path; one request
// leaves every 4 cycles at most. The per-Jetty queue depth, the two-step scan
// and the counter widths are this implementation's choices.
module jsched
  import urma_pkg::*;
#(
  parameter int unsigned NUM_JETTY = 1024,
  parameter int unsigned WQ_DEPTH  = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  wqe_t        in_wqe,
  output logic        out_valid,
  input  logic        out_ready,
  output wr_t         out_wr,
  // Jetty table read port: validity of the picked Jetty
  output jetty_id_t   jt_idx,
  input  jetty_rec_t  jt_rec,
  // completion notification
  input  logic        cn_valid,
  input  jetty_id_t   cn_jetty,
  output logic [15:0] drop_cnt,
  output logic [15:0] fence_wait_cnt
);
  localparam int unsigned JW = $clog2(NUM_JETTY);
  localparam int unsigned DW = (WQ_DEPTH > 1) ? $clog2(WQ_DEPTH) : 1;

  typedef enum logic [2:0] { S_SNAP, S_PICK, S_READ, S_GATE, S_OUT } st_e;
  st_e st;

  wqe_t                 wq [NUM_JETTY*WQ_DEPTH];
  logic [DW-1:0]        head [NUM_JETTY];
  logic [DW-1:0]        tail [NUM_JETTY];
  logic [DW:0]          cnt  [NUM_JETTY];
  tsn_t                 tsn_next [NUM_JETTY];
  logic [7:0]           outst [NUM_JETTY];
  logic [NUM_JETTY-1:0] fence_latch;
  logic [NUM_JETTY-1:0] nonempty, elig_r;
  logic [JW-1:0]        rr, sel;
  logic                 found;
  logic [JW-1:0]        pick;
  wqe_t                 wqe_r;

  for (genvar j = 0; j < int'(NUM_JETTY); j++) begin : g_ne
    assign nonempty[j] = (cnt[j] != '0);
  end

  logic [JW-1:0] in_j;
  assign in_j     = in_wqe.jetty[JW-1:0];
  assign in_ready = (cnt[in_j] != (DW+1)'(WQ_DEPTH));
  assign jt_idx   = jetty_id_t'(sel);

  // round-robin search of the eligible snapshot, starting at rr
  always_comb begin
    found = 1'b0;
    pick  = rr;
    for (int k = 0; k < int'(NUM_JETTY); k++) begin
      logic [JW-1:0] idx;
      idx = rr + JW'(k);
      if (!found && elig_r[idx]) begin
        found = 1'b1;
        pick  = idx;
      end
    end
  end

  logic deq;
  assign deq = (st == S_GATE) && !(wqe_r.fence && outst[sel] != 8'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_SNAP;
      rr          <= '0;
      sel         <= '0;
      elig_r      <= '0;
      fence_latch <= '0;
      out_valid   <= 1'b0;
      out_wr      <= '0;
      wqe_r       <= '0;
      drop_cnt    <= '0;
      fence_wait_cnt <= '0;
      for (int j = 0; j < int'(NUM_JETTY); j++) begin
        head[j] <= '0; tail[j] <= '0; cnt[j] <= '0; tsn_next[j] <= '0; outst[j] <= '0;
      end
    end else begin
      // enqueue
      if (in_valid && in_ready) begin
        wq[{in_j, tail[in_j]}] <= in_wqe;
        tail[in_j] <= tail[in_j] + 1'b1;
      end
      // per-Jetty occupancy and outstanding counters
      for (int j = 0; j < int'(NUM_JETTY); j++) begin
        logic inc, dec, oinc, odec;
        inc  = in_valid && in_ready && (in_j == JW'(j));
        dec  = deq && (sel == JW'(j));
        oinc = deq && (sel == JW'(j)) && jt_rec.valid[0];
        odec = cn_valid && (cn_jetty[JW-1:0] == JW'(j)) && (outst[j] != 8'd0);
        cnt[j]   <= cnt[j] + (inc ? 1 : 0) - (dec ? 1 : 0);
        outst[j] <= outst[j] + (oinc ? 8'd1 : 8'd0) - (odec ? 8'd1 : 8'd0);
        if (odec && outst[j] == 8'd1) fence_latch[j] <= 1'b0;
      end

      case (st)
        S_SNAP: begin
          elig_r <= nonempty & ~fence_latch;
          st     <= S_PICK;
        end
        S_PICK: begin
          if (found) begin
            sel <= pick;
            rr  <= pick + 1'b1;
            st  <= S_READ;
          end else begin
            elig_r <= nonempty & ~fence_latch;   // idle: re-snapshot every cycle
          end
        end
        S_READ: begin
          wqe_r <= wq[{sel, head[sel]}];
          st    <= S_GATE;
        end
        S_GATE: begin
          if (!deq) begin
            fence_latch[sel] <= 1'b1;
            fence_wait_cnt   <= fence_wait_cnt + 16'd1;
            st <= S_SNAP;
          end else begin
            head[sel] <= head[sel] + 1'b1;
            if (jt_rec.valid[0]) begin
              out_valid     <= 1'b1;
              out_wr.w      <= wqe_r;
              out_wr.tsn    <= tsn_next[sel];
              tsn_next[sel] <= tsn_next[sel] + 1'b1;
              st <= S_OUT;
            end else begin
              drop_cnt <= drop_cnt + 16'd1;
              st <= S_SNAP;
            end
          end
        end
        S_OUT: begin
          if (out_ready) begin
            out_valid <= 1'b0;
            st <= S_SNAP;
          end
        end
        default: st <= S_SNAP;
      endcase
    end
  end
endmodule
