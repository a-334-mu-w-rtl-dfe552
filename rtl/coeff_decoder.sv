// coeff_decoder: unpacks polynomial coefficients from 64-bit memory words.
// The vector multiplier holds two of these, the public decoder (13-bit
// packed ring elements or 16-bit containers) and the secret decoder (4-bit
// two's complement secrets), and the coefficient-wise blocks use the same
// unit for their inputs (1, 8 and 10-bit formats as well). Words are read
// from consecutive addresses from base; the bit stream is LSB first (word 0
// bit 0 is bit 0 of coefficient 0). Each cycle in which valid and take are
// high, four consecutive coefficients leave on coef[0..3], zero-extended to
// 16 bits. A 192-bit buffer absorbs the mismatch between 64-bit words and
// 4-coefficient groups and prefetches, so that after a start-up of two
// cycles a group is available every cycle in every format. rd_hold blocks a
// read request in a cycle when the port is needed for something else. The
// paper names the decoders and the 4/13/16-bit formats; the buffer and the
// prefetch scheme are this design's.
module coeff_decoder
  import saber_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,      // load base/nwords/fmt, clear buffer
  input  logic [ADDR_W-1:0] base,
  input  logic [6:0]        nwords,
  input  cfmt_e             fmt,
  input  logic              rd_hold,
  output logic              rd_en,      // memory read request this cycle
  output logic [ADDR_W-1:0] rd_addr,
  input  logic [WORD_W-1:0] rd_data,    // data of the request of last cycle
  input  logic              take,
  output logic              valid,
  output logic [3:0][15:0]  coef
);
  localparam int unsigned BUF_W = 192;
  logic [BUF_W-1:0]  buf_q, buf_d;
  logic [7:0]        cnt_q, cnt_d, gb, cnt_after;
  logic              inflight_q;
  logic [ADDR_W-1:0] addr_q;
  logic [6:0]        left_q;
  cfmt_e             fmt_q;

  always_comb begin
    gb = grp_bits(fmt_q);
    valid = (cnt_q >= gb);
    for (int k = 0; k < 4; k++) begin
      unique case (fmt_q)
        F1:      coef[k] = {15'd0, buf_q[k]};
        F4:      coef[k] = {12'd0, buf_q[k*4 +: 4]};
        F8:      coef[k] = {8'd0,  buf_q[k*8 +: 8]};
        F10:     coef[k] = {6'd0,  buf_q[k*10 +: 10]};
        F13:     coef[k] = {3'd0,  buf_q[k*13 +: 13]};
        default: coef[k] = buf_q[k*16 +: 16];
      endcase
    end
    cnt_after = (valid && take) ? cnt_q - gb : cnt_q;
    buf_d = (valid && take) ? (buf_q >> gb) : buf_q;
    if (inflight_q) buf_d = buf_d | ({{(BUF_W-WORD_W){1'b0}}, rd_data} << cnt_after);
    cnt_d = cnt_after + (inflight_q ? 8'd64 : 8'd0);
    rd_en = (left_q != 0) && (cnt_d <= 8'd128) && !rd_hold;
    rd_addr = addr_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0; cnt_q <= '0; inflight_q <= 1'b0;
      addr_q <= '0; left_q <= '0; fmt_q <= F16;
    end else if (start) begin
      buf_q <= '0; cnt_q <= '0; inflight_q <= 1'b0;
      addr_q <= base; left_q <= nwords; fmt_q <= fmt;
    end else begin
      buf_q <= buf_d;
      cnt_q <= cnt_d;
      inflight_q <= rd_en;
      if (rd_en) begin
        addr_q <= addr_q + 1'b1;
        left_q <= left_q - 1'b1;
      end
    end
  end
endmodule
