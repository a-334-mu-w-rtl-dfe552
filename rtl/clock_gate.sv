// clock_gate: per-block clock gating cell. The enable is sampled by a flop
// clocked on the falling edge of clk, and its output is ANDed with clk, so
// the gated clock only ever carries whole high phases. The published gating
// circuit has a D flip-flop with inputs clk_en and clk and an output
// Gated_clk; capturing on the falling edge and combining with an AND is
// this design's reading of it, the usual latch-free clock gate. Timing: an enable raised after a rising edge lets the next rising
// edge through; an enable dropped likewise blocks the next rising edge.
module clock_gate (
  input  logic clk,
  input  logic rst_n,
  input  logic clk_en,
  output logic gated_clk
);
  logic en_q;
  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) en_q <= 1'b0;
    else        en_q <= clk_en;
  end
  assign gated_clk = clk & en_q;
endmodule
