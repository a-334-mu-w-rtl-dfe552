// bs2polvecp: BS2PolVecP block. It converts one polynomial mod p from its
// byte form (10 bits per coefficient, 40 words from off1, as in Saber public
// keys and ciphertexts) into 16-bit coefficient containers (64 words from
// off2), the format in which the vector multiplier reads b and b'. The
// paper says only that this block changes the packing with a buffer; the
// direction (bytes to 16-bit coefficients) follows its name.
// Interface: start pulse with off1/off2 while busy is low; done pulses
// when the last word is written; port A reads, port B reads and writes.
module bs2polvecp
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
      grp_o[k] = grp_a[k];

  coef_stream u_stream (.clk, .rst_n, .start,
    .fmt_a(F10), .base_a(off1), .use_b(1'b0), .fmt_b(F16), .base_b(off1),
    .fmt_o(F16), .base_o(off2),
    .mem_a, .rdata_a, .mem_b, .rdata_b,
    .grp_a, .grp_b, .grp_idx, .grp_o, .busy, .done);
endmodule
