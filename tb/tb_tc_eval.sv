// tb_tc_eval: feeds random groups of four coefficients and checks the seven
// evaluated values against a direct evaluation of r0 + r1 z + r2 z^2 + r3 z^3
// at z = infinity, 2, 1, -1, 1/2 (times 8), -1/2 (times 8) and 0, modulo 2^16,
// one cycle after the input.
module tb_tc_eval;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [3:0][15:0] r;
  logic [6:0][15:0] aws;
  tc_eval dut (.clk, .rst_n, .in_valid, .r, .out_valid, .aws);
  int checks = 0, failures = 0;
  function automatic logic [15:0] ev(input logic [3:0][15:0] c, input int k);
    int s [4];
    for (int i = 0; i < 4; i++) s[i] = int'(c[i]);
    case (k)
      0: return 16'(s[3]);
      1: return 16'(s[0] + 2*s[1] + 4*s[2] + 8*s[3]);
      2: return 16'(s[0] + s[1] + s[2] + s[3]);
      3: return 16'(s[0] - s[1] + s[2] - s[3]);
      4: return 16'(8*s[0] + 4*s[1] + 2*s[2] + s[3]);
      5: return 16'(8*s[0] - 4*s[1] + 2*s[2] - s[3]);
      default: return 16'(s[0]);
    endcase
  endfunction
  initial begin
    logic [3:0][15:0] prev;
    in_valid = 0; r = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < 4; i++) r[i] = (t < 150) ? 16'($urandom_range(0, 8191)) : 16'($urandom);
      in_valid = 1; prev = r;
      @(negedge clk);
      checks++; if (!out_valid) begin failures++; $display("FAIL valid"); end
      for (int k = 0; k < 7; k++) begin
        checks++;
        if (aws[k] != ev(prev, k)) begin failures++; $display("FAIL aws%0d %h vs %h", k+1, aws[k], ev(prev, k)); end
      end
    end
    in_valid = 0; @(negedge clk);
    checks++; if (out_valid) begin failures++; $display("FAIL valid stays"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
