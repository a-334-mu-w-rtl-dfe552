// tb_tc_mac_unit: runs one MAC unit through a full 64x64 negacyclic
// product, 16 groups of four secret values, in the order the multiplier's
// controller uses (1 cycle for the cache read of the secrets, 2 load
// cycles, 3 fill cycles, 64 steps, 3 flush cycles: 73 per group).
// The testbench plays the result cache itself: it supplies w_in and
// stores w_out. The cache starts with random partial sums, and the final
// contents must equal those plus the schoolbook product modulo y^64 + 1 and
// 2^16. The run must take 1168 cycles.
module tb_tc_mac_unit;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;
  logic load_b, b_hi, fill, step, flush;
  logic [1:0][7:0] b_pair;
  logic [3:0] neg;
  logic [15:0] a_in, w_in, w_out;
  tc_mac_unit dut (.clk, .rst_n, .load_b, .b_hi, .b_pair, .fill, .step, .flush,
                   .neg, .a_in, .w_in, .w_out);
  logic [15:0] a [64];
  logic signed [7:0] b [64];
  logic [15:0] rc [64];
  logic [15:0] expv [64];
  int checks = 0, failures = 0, cycles = 0;
  bit running = 0;
  always @(posedge clk) if (running) cycles++;
  task automatic idle();
    load_b = 0; fill = 0; step = 0; flush = 0; neg = '0;
  endtask
  initial begin
    idle(); b_hi = 0; b_pair = '0; a_in = '0; w_in = '0;
    for (int i = 0; i < 64; i++) begin
      a[i] = 16'($urandom); b[i] = 8'($urandom_range(0, 8) - 4); rc[i] = 16'($urandom);
      expv[i] = rc[i];
    end
    b[5] = 8'sd127; b[6] = -8'sd128;     // extreme multiplier values
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++) begin
        logic [15:0] p;
        p = 16'(int'(a[i]) * int'(b[j]));
        if (i + j < 64) expv[i+j] += p; else expv[i+j-64] -= p;
      end
    repeat (2) @(negedge clk); rst_n = 1;
    running = 1;
    for (int g = 0; g < 16; g++) begin
      automatic int j = 4 * g;
      idle(); @(negedge clk);               // secret values read from the cache
      for (int h = 0; h < 2; h++) begin
        idle(); load_b = 1; b_hi = h[0]; b_pair = {b[j+2*h+1], b[j+2*h]};
        @(negedge clk);
      end
      for (int f = 0; f < 3; f++) begin
        idle(); fill = 1; w_in = rc[j+f];
        @(negedge clk);
      end
      for (int i = 0; i < 64; i++) begin
        idle(); step = 1; a_in = a[i];
        w_in = rc[(i + j + 3) % 64];
        for (int t = 0; t < 4; t++) neg[t] = (i + j + t >= 64);
        #4 rc[(i + j) % 64] = w_out;
        @(negedge clk);
      end
      for (int f = 0; f < 3; f++) begin
        idle(); flush = 1;
        #4 rc[(j + f) % 64] = w_out;
        @(negedge clk);
      end
    end
    running = 0; idle();
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (rc[i] != expv[i]) begin failures++; $display("FAIL idx %0d %h vs %h", i, rc[i], expv[i]); end
    end
    checks++; if (cycles != 1168) begin failures++; $display("FAIL cycles %0d", cycles); end
    $display("MAC cycles %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
