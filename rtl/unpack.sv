// unpack: Unpack block (decryption, line 2 of Saber.PKE.Dec). It recovers
// the message bits: m' = ((v - 2^(10-4) * c_m + h2) mod p) >> (10 - 1),
// h2 = 228. Inputs: v as 64 words of 16-bit coefficients from off1, c_m as
// 16 words of 4-bit coefficients from off2. Output: m', 256 bits in 4 words
// from off2 + 16 (output placement after the second input is this design's
// choice, the instruction carrying only two offsets). Four coefficients per
// cycle as in the paper.
// Interface: start pulse with off1/off2 while busy is low; done pulses
// when the last word is written; port A reads, port B reads and writes.
module unpack
  import saber_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] off1,
  input  logic [ADDR_W-1:0] off2,
  output logic              busy,
  output logic              done,
  output mem_req_t          mem_a,
  input  logic [WORD_W-1:0] rdata_a,
  output mem_req_t          mem_b,
  input  logic [WORD_W-1:0] rdata_b
);
  logic [3:0][15:0] grp_a, grp_b, grp_o;
  logic [5:0]       grp_idx;

  always_comb
    for (int k = 0; k < 4; k++)
      grp_o[k] = {15'd0, 1'((16'(grp_a[k] - {grp_b[k][9:0], 6'd0} + H2) & 16'h3ff) >> 9)};

  coef_stream u_stream (.clk, .rst_n, .start,
    .fmt_a(F16), .base_a(off1), .use_b(1'b1), .fmt_b(F4), .base_b(off2),
    .fmt_o(F1), .base_o(off2 + ADDR_W'(W_POLY4)),
    .mem_a, .rdata_a, .mem_b, .rdata_b,
    .grp_a, .grp_b, .grp_idx, .grp_o, .busy, .done);
endmodule
