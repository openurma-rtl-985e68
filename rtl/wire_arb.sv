// wire_arb: frame-atomic two-input merge onto the Ethernet transmit port.
//
// Joins the framed output of the main transmit pipeline (input 0) and of
// the load/store bypass engine (input 1) onto the single wire. The choice is
// made only at a frame boundary and alternates when both wait; once an input
// is chosen it keeps the wire until the word marked last. Combinational, so
// an idle wire adds no latency to either path.
module wire_arb
  import urma_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] in_valid,
  output logic [1:0] in_ready,
  input  wword_t     in_word [2],
  output logic       out_valid,
  input  logic       out_ready,
  output wword_t     out_word
);
  logic locked, lsel, last_sel, sel;
  always_comb begin
    if (locked)              sel = lsel;
    else if (&in_valid)      sel = !last_sel;
    else                     sel = in_valid[1];
  end
  assign out_valid = in_valid[sel];
  assign out_word  = in_word[sel];
  always_comb begin
    in_ready      = '0;
    in_ready[sel] = out_ready;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; lsel <= 1'b0; last_sel <= 1'b1;
    end else if (out_valid && out_ready) begin
      if (!locked) last_sel <= sel;
      locked <= !out_word.last;
      lsel   <= sel;
    end
  end
endmodule
