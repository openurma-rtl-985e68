// rto: retransmission timeout timer with exponential backoff.
//
// One deadline per TP Channel, all measured against one free-running cycle
// counter. The retransmit buffer restarts a channel's timer when it gets busy
// or makes progress (backoff reset) and stops it when the channel drains. A
// scan pointer visits one channel per cycle; an armed channel whose deadline
// has passed raises an expiry towards the retransmit buffer, and when that is
// taken the channel's timeout doubles (shift of RTO_BASE by the backoff
// exponent, capped at MAX_SHIFT) and its deadline moves on. The exponential
// backoff follows the design; the base timeout, the cap and the one-channel-
// per-cycle scan are this implementation's choices.
module rto
  import urma_pkg::*;
#(
  parameter int unsigned NUM_TPC   = 1024,
  parameter int unsigned RTO_BASE  = 4096,
  parameter int unsigned MAX_SHIFT = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tmr_valid,
  input  tpc_id_t     tmr_tpc,
  input  logic        tmr_busy,
  output logic        fire_valid,
  output tpc_id_t     fire_tpc,
  input  logic        fire_ready,
  output logic [15:0] fire_cnt
);
  localparam int unsigned CW = $clog2(NUM_TPC);
  logic [31:0]   now;
  logic [31:0]   dl    [NUM_TPC];
  logic [3:0]    shift [NUM_TPC];
  logic [NUM_TPC-1:0] armed;
  logic [CW-1:0] scan;
  logic [CW-1:0] tc;
  assign tc = tmr_tpc[CW-1:0];

  logic expired;
  assign expired    = armed[scan] && ($signed(now - dl[scan]) >= 0);
  assign fire_valid = expired && !(tmr_valid && tc == scan);
  assign fire_tpc   = tpc_id_t'(scan);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '0; scan <= '0; armed <= '0; fire_cnt <= '0;
      for (int i = 0; i < int'(NUM_TPC); i++) begin dl[i] <= '0; shift[i] <= '0; end
    end else begin
      now <= now + 32'd1;
      if (!(fire_valid && !fire_ready)) scan <= scan + 1'b1;
      if (fire_valid && fire_ready) begin
        logic [3:0] ns;
        ns = (32'(shift[scan]) < MAX_SHIFT) ? shift[scan] + 4'd1 : shift[scan];
        shift[scan] <= ns;
        dl[scan]    <= now + (RTO_BASE << ns);
        fire_cnt    <= fire_cnt + 16'd1;
      end
      if (tmr_valid) begin
        armed[tc] <= tmr_busy;
        shift[tc] <= '0;
        dl[tc]    <= now + RTO_BASE;
      end
    end
  end
endmodule
