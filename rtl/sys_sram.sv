// sys_sram: system data memory of the accelerator, a dual-port SRAM of
// DEPTH words x 64 bits (8 KB at the default 1K words, as in the paper).
// Both ports are synchronous: a read issued with en=1, we=0 returns its word
// on rdata one cycle later; a write with en=1, we=1 stores at the clock edge.
// The array stands in for the low-power low-leakage SRAM macro of the chip;
// the one-cycle read latency and the collision rule are this design's
// choices: a read and a write of one address in the same cycle return the
// old word, and if both ports write one address, port B wins.
module sys_sram
  import saber_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic              clk,
  input  mem_req_t          req_a,
  output logic [WORD_W-1:0] rdata_a,
  input  mem_req_t          req_b,
  output logic [WORD_W-1:0] rdata_b
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (req_a.en && !req_a.we) rdata_a <= mem[req_a.addr];
    if (req_b.en && !req_b.we) rdata_b <= mem[req_b.addr];
    if (req_a.en && req_a.we)  mem[req_a.addr] <= req_a.wdata;
    if (req_b.en && req_b.we)  mem[req_b.addr] <= req_b.wdata;
  end
endmodule
