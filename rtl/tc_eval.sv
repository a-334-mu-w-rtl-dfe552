// tc_eval: evaluation datapath of the striding Toom-Cook 4-way multiplier.
// Each cycle it takes four consecutive coefficients r0..r3 of one operand
// (coefficients 4j..4j+3) and produces the seven evaluated values of
// iteration j at the points infinity, 2, 1, -1, 1/2 (scaled by 8), -1/2
// (scaled by 8) and 0, registered as aws[1..7] (index 0..6 here). Only adds,
// subtracts and shifts are used, at most two adders deep, so there is a
// single register stage: out_valid follows in_valid by one cycle. The
// arithmetic is modulo 2^16, which is enough for q = 2^13 because the later
// interpolation divides by at most 2^3. This follows the paper's evaluation
// algorithm and datapath figure; only the register placement is assumed.
module tc_eval (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [3:0][15:0] r,        // r[0] = coefficient 4j
  output logic             out_valid,
  output logic [6:0][15:0] aws       // aws[k] = aws_(k+1) of the algorithm
);
  logic [15:0] s02, s13, h0, h1;
  logic [6:0][15:0] aws_d;

  always_comb begin
    s02 = r[0] + r[2];
    s13 = r[1] + r[3];
    h0  = {r[0][12:0], 3'b000} + {r[2][14:0], 1'b0};   // 2*(4*r0 + r2)
    h1  = {r[1][13:0], 2'b00} + r[3];                  // 4*r1 + r3
    aws_d[0] = r[3];                                                         // aws1
    aws_d[1] = {r[3][12:0], 3'b000} + {r[2][13:0], 2'b00}
             + {r[1][14:0], 1'b0} + r[0];                                    // aws2
    aws_d[2] = s02 + s13;                                                    // aws3
    aws_d[3] = s02 - s13;                                                    // aws4
    aws_d[4] = h0 + h1;                                                      // aws5
    aws_d[5] = h0 - h1;                                                      // aws6
    aws_d[6] = r[0];                                                         // aws7
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      aws <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) aws <= aws_d;
    end
  end
endmodule
