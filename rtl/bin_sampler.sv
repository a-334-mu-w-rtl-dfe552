// bin_sampler: binomial sampler of the Saber accelerator (mu = 8). Each
// secret coefficient is made from one byte of SHAKE output: the Hamming
// weight of the high nibble is subtracted from that of the low nibble,
// giving a value in [-4, 4]. Each Hamming weight is computed by three half
// adders and one full adder, and the difference by a subtractor, as in the
// paper's sampler figure; the logic is purely combinational. Input: 32 words
// of random bytes from off1 (one polynomial). Output: 256 coefficients as
// 4-bit two's complement, 16 words from off2, the format the multiplier's
// secret decoder reads. Four coefficients per cycle. Which nibble is
// subtracted from which follows the Saber reference sampler.
// Interface: start pulse with off1/off2 while busy is low; done pulses
// when the last word is written; port A reads, port B writes.
module bin_sampler
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

  // Hamming weight of a nibble: HA(b0,b1), HA(b2,b3), HA(sums), FA(carries)
  function automatic logic [2:0] hw4(input logic [3:0] b);
    logic s0, c0, s1, c1, s2, c2;
    s0 = b[0] ^ b[1];  c0 = b[0] & b[1];
    s1 = b[2] ^ b[3];  c1 = b[2] & b[3];
    s2 = s0 ^ s1;      c2 = s0 & s1;
    return {c0 & c1 | c2 & (c0 ^ c1), c0 ^ c1 ^ c2, s2};
  endfunction

  always_comb
    for (int k = 0; k < 4; k++)
      grp_o[k] = {12'd0, 4'({1'b0, hw4(grp_a[k][3:0])} - {1'b0, hw4(grp_a[k][7:4])})};

  coef_stream u_stream (.clk, .rst_n, .start,
    .fmt_a(F8), .base_a(off1), .use_b(1'b0), .fmt_b(F8), .base_b(off1),
    .fmt_o(F4), .base_o(off2),
    .mem_a, .rdata_a, .mem_b, .rdata_b,
    .grp_a, .grp_b, .grp_idx, .grp_o, .busy, .done);
endmodule
