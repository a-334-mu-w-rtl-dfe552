// coeff_packer: the inverse of coeff_decoder. Each cycle with in_valid it
// takes four coefficients, keeps the low 1, 4, 8, 10, 13 or 16 bits of each
// (fmt) and appends them LSB first to a 128-bit buffer; whenever 64 bits are
// collected the word leaves on out_word with out_valid, one cycle later.
// At most 64 bits enter per cycle, so the buffer never overflows. This is
// the "buffer" the paper gives the rounding blocks; its form is this
// design's.
module coeff_packer
  import saber_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cfmt_e             fmt,
  input  logic              in_valid,
  input  logic [3:0][15:0]  coef,
  output logic              out_valid,
  output logic [WORD_W-1:0] out_word
);
  logic [127:0] buf_q, buf_d;
  logic [7:0]   cnt_q, cnt_d;
  logic [63:0]  grp;
  cfmt_e        fmt_q;

  always_comb begin
    grp = '0;
    for (int k = 0; k < 4; k++) begin
      unique case (fmt_q)
        F1:      grp[k]         = coef[k][0];
        F4:      grp[k*4 +: 4]  = coef[k][3:0];
        F8:      grp[k*8 +: 8]  = coef[k][7:0];
        F10:     grp[k*10 +: 10] = coef[k][9:0];
        F13:     grp[k*13 +: 13] = coef[k][12:0];
        default: grp[k*16 +: 16] = coef[k];
      endcase
    end
    buf_d = buf_q;
    cnt_d = cnt_q;
    if (in_valid) begin
      buf_d = buf_d | ({64'd0, grp} << cnt_q);
      cnt_d = cnt_q + grp_bits(fmt_q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0; cnt_q <= '0; out_valid <= 1'b0; out_word <= '0; fmt_q <= F16;
    end else if (start) begin
      buf_q <= '0; cnt_q <= '0; out_valid <= 1'b0; fmt_q <= fmt;
    end else begin
      out_valid <= 1'b0;
      if (cnt_d >= 8'd64) begin
        out_valid <= 1'b1;
        out_word  <= buf_d[63:0];
        buf_q     <= buf_d >> 64;
        cnt_q     <= cnt_d - 8'd64;
      end else begin
        buf_q <= buf_d;
        cnt_q <= cnt_d;
      end
    end
  end
endmodule
