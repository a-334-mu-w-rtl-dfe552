// tc_mac_unit: one of the seven 64x64 multiply-accumulate units of the
// striding Toom-Cook multiplier. It computes a negacyclic product (modulo
// y^64 + 1) of an evaluated public operand a (16-bit values) and an
// evaluated secret b (8-bit signed values) and adds it to the products
// already in the intermediate-result cache (lazy interpolation).
// Four multipliers work on four consecutive secret values b_j..b_j+3 held in
// registers. The public values a_0..a_63 stream past; at step i the products
// a_i*b_(j+t) land on result indices i+j+t, so a window of four partial
// sums slides along the result: each step the lowest sum is finished and
// written back (w_out) and the next one enters from the cache (w_in).
// Indices of 64 and above wrap with a minus sign (neg[t]). The controller
// runs, per group of four secrets, 2 cycles of b loading (load_b), 4 of
// window fill (fill, the first without data), 64 steps (step) and 3 flush
// cycles (flush): 73 cycles, 1168 for the 16 groups, which is the paper's
// latency formula with n = 4. Multiplication is shift-and-add, as in the
// paper; the window and the control signals are this design's reading of
// the MAC figure.
module tc_mac_unit (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load_b,     // load one pair of secret values
  input  logic              b_hi,       // pair goes to b2,b3 (else b0,b1)
  input  logic [1:0][7:0]   b_pair,
  input  logic              fill,       // shift w_in into the window top
  input  logic              step,       // one multiply-accumulate step
  input  logic              flush,      // shift the window out
  input  logic [3:0]        neg,        // subtract product t (index wraps)
  input  logic [15:0]       a_in,
  input  logic [15:0]       w_in,
  output logic [15:0]       w_out
);
  logic signed [7:0] b_q [4];
  logic [15:0] win_q [3];
  logic [15:0] nw [4];

  // shift-and-add product of a by signed 8-bit b, modulo 2^16
  function automatic logic [15:0] mul_sa(input logic [15:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int k = 0; k < 7; k++)
      if (b[k]) p = p + (a << k);
    if (b[7]) p = p - (a << 7);
    return p;
  endfunction

  always_comb begin
    for (int t = 0; t < 4; t++) begin
      logic [15:0] acc, prod;
      acc  = (t < 3) ? win_q[t] : w_in;
      prod = mul_sa(a_in, b_q[t]);
      nw[t] = neg[t] ? acc - prod : acc + prod;
    end
    w_out = step ? nw[0] : win_q[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < 4; t++) b_q[t] <= '0;
      for (int t = 0; t < 3; t++) win_q[t] <= '0;
    end else begin
      if (load_b) begin
        if (b_hi) begin b_q[2] <= b_pair[0]; b_q[3] <= b_pair[1]; end
        else      begin b_q[0] <= b_pair[0]; b_q[1] <= b_pair[1]; end
      end
      if (fill) begin
        win_q[0] <= win_q[1]; win_q[1] <= win_q[2]; win_q[2] <= w_in;
      end else if (step) begin
        win_q[0] <= nw[1]; win_q[1] <= nw[2]; win_q[2] <= nw[3];
      end else if (flush) begin
        win_q[0] <= win_q[1]; win_q[1] <= win_q[2]; win_q[2] <= '0;
      end
    end
  end
endmodule
