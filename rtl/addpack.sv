// addpack: AddPack block (encryption, line 7 of Saber.PKE.Enc). It encodes
// the message into v' and rounds from p to T:
// c_m = ((v' + h1 - 2^(10-1) * m) mod p) >> (10 - 4).
// Inputs: v' as 64 words of 16-bit coefficients from off1, the 256-bit
// message m as 4 words from off2. Output: c_m, 4 bits per coefficient, 16
// words from off2 + 4 (the instruction carries only two offsets; the output
// placement after the second input is this design's choice). Four
// coefficients per cycle as in the paper.
// Interface: start pulse with off1/off2 while busy is low; done pulses
// when the last word is written; port A reads, port B reads and writes.
module addpack
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
      grp_o[k] = {12'd0, 4'((16'(grp_a[k] + H1 - {grp_b[k][6:0], 9'd0}) & 16'h3ff) >> 6)};

  coef_stream u_stream (.clk, .rst_n, .start,
    .fmt_a(F16), .base_a(off1), .use_b(1'b1), .fmt_b(F1), .base_b(off2),
    .fmt_o(F4), .base_o(off2 + ADDR_W'(W_MSG)),
    .mem_a, .rdata_a, .mem_b, .rdata_b,
    .grp_a, .grp_b, .grp_idx, .grp_o, .busy, .done);
endmodule
