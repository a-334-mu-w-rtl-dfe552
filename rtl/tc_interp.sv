// tc_interp: interpolation datapath of the striding Toom-Cook 4-way
// multiplier. Row i of the intermediate-result cache holds the seven
// accumulated point products w1..w7 at index i; from them the datapath
// rebuilds the seven coefficient polynomials at index i and folds them into
// result coefficients 4i..4i+3: the upper three (those of x^4..x^6) are
// carried to the next row, and those of the last row wrap onto
// coefficients 0..2 with a minus sign, so the result is already reduced
// modulo x^256 + 1. Word 0 is therefore held back and emitted one cycle after
// word 63. Exact divisions use shifts and multiplication by the inverses of
// 3, 9 and 15 modulo 2^16. The work is split in three register stages, as in
// the paper; input i appears as output word i three cycles later, and the
// coefficients are reduced to 13 bits (mod q) in 16-bit containers.
// Note: the paper's listing doubles r4 before subtracting 64*r6 and reuses
// r8 as a temporary; that order does not reproduce the product, so this
// datapath uses the order of the Saber reference code (subtract 64*r6, then
// double), which is the same Toom-Cook interpolation. The published
// datapath is a depth-optimised reordering of the same sequence; this one
// keeps the listing's order and splits it into three stages instead.
module tc_interp (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,       // clears the row carry
  input  logic              in_valid,
  input  logic [6:0][15:0]  w,           // w[k] = w_(k+1)
  output logic              out_valid,
  output logic [5:0]        out_idx,     // word index of the result
  output logic [63:0]       out_word     // coefficients 4i..4i+3, 16 bits each
);
  localparam logic [15:0] INV3  = 16'd43691;
  localparam logic [15:0] INV9  = 16'd36409;
  localparam logic [15:0] INV15 = 16'd61167;
  typedef logic [6:0][15:0] regs_t;

  regs_t s1_q, s2_q;
  logic  v1_q, v2_q;
  logic [5:0] i1_q, i2_q, in_idx_q;
  logic [2:0][15:0] prev_q;      // r0, r1, r2 of the previous row
  logic [3:0][15:0] word0_q;     // row 0 before the wrap-around correction
  logic wrap_pending_q;

  function automatic logic [63:0] mask13(input logic [3:0][15:0] c);
    logic [63:0] o;
    for (int k = 0; k < 4; k++) o[k*16 +: 16] = {3'd0, c[k][12:0]};
    return o;
  endfunction

  // stage 1
  regs_t s1_d;
  always_comb begin
    logic [15:0] r0, r1, r2, r3, r4, r5, r6, t;
    r0 = w[0]; r1 = w[1]; r2 = w[2]; r3 = w[3]; r4 = w[4]; r5 = w[5]; r6 = w[6];
    r1 = r1 + r4;
    r5 = r5 - r4;
    t  = r3 - r2;
    r3 = {1'b0, t[15:1]};
    r4 = r4 - r0;
    r4 = r4 - {r6[9:0], 6'd0};
    r4 = {r4[14:0], 1'b0} + r5;
    r2 = r2 + r3;
    s1_d = {r6, r5, r4, r3, r2, r1, r0};
  end

  // stage 2
  regs_t s2_d;
  always_comb begin
    logic [15:0] r0, r1, r2, r3, r4, r5, r6, t;
    {r6, r5, r4, r3, r2, r1, r0} = s1_q;
    r1 = r1 - (r2 * 16'd65);
    r2 = r2 - r6;
    r2 = r2 - r0;
    r1 = r1 + (r2 * 16'd45);
    t  = (r4 - {r2[12:0], 3'd0}) * INV3;
    r4 = {3'd0, t[15:3]};
    r5 = r5 + r1;
    s2_d = {r6, r5, r4, r3, r2, r1, r0};
  end

  // stage 3
  logic [6:0][15:0] s3;
  always_comb begin
    logic [15:0] r0, r1, r2, r3, r4, r5, r6, t;
    {r6, r5, r4, r3, r2, r1, r0} = s2_q;
    t  = (r1 + {r3[11:0], 4'd0}) * INV9;
    r1 = {1'b0, t[15:1]};
    r3 = -(r3 + r1);
    t  = (r1 * 16'd30 - r5) * INV15;
    r5 = {2'd0, t[15:2]};
    r2 = r2 - r4;
    r1 = r1 - r5;
    s3 = {r6, r5, r4, r3, r2, r1, r0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_q <= '0; s2_q <= '0; v1_q <= 1'b0; v2_q <= 1'b0;
      i1_q <= '0; i2_q <= '0; in_idx_q <= '0; prev_q <= '0; word0_q <= '0;
      wrap_pending_q <= 1'b0; out_valid <= 1'b0; out_idx <= '0; out_word <= '0;
    end else if (start) begin
      v1_q <= 1'b0; v2_q <= 1'b0; in_idx_q <= '0; prev_q <= '0;
      wrap_pending_q <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1_q <= in_valid;
      if (in_valid) begin
        s1_q <= s1_d; i1_q <= in_idx_q; in_idx_q <= in_idx_q + 1'b1;
      end
      v2_q <= v1_q;
      if (v1_q) begin s2_q <= s2_d; i2_q <= i1_q; end
      out_valid <= 1'b0;
      if (v2_q) begin
        // s3 = {r6, r5, r4, r3, r2, r1, r0}
        prev_q <= {s3[2], s3[1], s3[0]};
        if (i2_q == 6'd0) begin
          word0_q <= {s3[3], s3[4], s3[5], s3[6]};
        end else begin
          out_valid <= 1'b1;
          out_idx   <= i2_q;
          out_word  <= mask13({s3[3], s3[4] + prev_q[0], s3[5] + prev_q[1],
                               s3[6] + prev_q[2]});
        end
        if (i2_q == 6'd63) wrap_pending_q <= 1'b1;
      end else if (wrap_pending_q) begin
        wrap_pending_q <= 1'b0;
        out_valid <= 1'b1;
        out_idx   <= 6'd0;
        out_word  <= mask13({word0_q[3], word0_q[2] - prev_q[0],
                             word0_q[1] - prev_q[1], word0_q[0] - prev_q[2]});
      end
    end
  end
endmodule
