// addround: AddRound block of the Saber accelerator. It adds the rounding
// constant h1 = 4 to each coefficient of a product polynomial (16-bit
// containers, values mod q = 2^13) and keeps the top 10 bits:
// b = ((x + h1) mod q) >> (13 - 10), as in the key generation and the
// encryption of Saber. Input: 64 words from off1. Output: the polynomial
// mod p packed at 10 bits per coefficient, 40 words from off2, the byte
// layout of Saber public keys and ciphertexts. Four coefficients per cycle
// as in the paper; the packed output format is this design's choice.
// Interface: start pulse with off1/off2 while busy is low; done pulses
// when the last word is written; port A reads, port B reads and writes.
module addround
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
      grp_o[k] = {6'd0, 10'((16'(grp_a[k] + H1) & 16'h1fff) >> 3)};

  coef_stream u_stream (.clk, .rst_n, .start,
    .fmt_a(F16), .base_a(off1), .use_b(1'b0), .fmt_b(F16), .base_b(off1),
    .fmt_o(F10), .base_o(off2),
    .mem_a, .rdata_a, .mem_b, .rdata_b,
    .grp_a, .grp_b, .grp_idx, .grp_o, .busy, .done);
endmodule
