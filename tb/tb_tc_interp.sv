// tb_tc_interp: builds the input of the interpolation the way the
// multiplier does, independently of the RTL. Three pairs of random
// polynomials (13-bit public, secrets in [-4, 4]) are split by stride 4,
// evaluated at the seven Toom-Cook points, multiplied pointwise modulo
// y^64 + 1 and summed (lazy interpolation). The 64 rows are streamed in
// one per cycle, and the output words must equal the sum of the three
// schoolbook products modulo x^256 + 1 and 2^13. Timing: word i leaves three
// cycles after row i, word 0 last, 67 cycles after the first row (the
// paper budgets 70 cycles for interpolation).
module tb_tc_interp;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;
  logic start, in_valid, out_valid;
  logic [6:0][15:0] w;
  logic [5:0] out_idx;
  logic [63:0] out_word;
  tc_interp dut (.clk, .rst_n, .start, .in_valid, .w, .out_valid, .out_idx, .out_word);
  int checks = 0, failures = 0;
  int a [3][256];
  int b [3][256];
  int ref_c [256];
  logic [15:0] wm [7][64];
  bit seen [64];
  int cyc = 0, last_cyc = 0, nout = 0;

  function automatic int ev(input int c0, input int c1, input int c2, input int c3, input int k);
    case (k)
      0: return c3;
      1: return c0 + 2*c1 + 4*c2 + 8*c3;
      2: return c0 + c1 + c2 + c3;
      3: return c0 - c1 + c2 - c3;
      4: return 8*c0 + 4*c1 + 2*c2 + c3;
      5: return 8*c0 - 4*c1 + 2*c2 - c3;
      default: return c0;
    endcase
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      nout++; last_cyc = cyc;
      seen[out_idx] = 1;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (out_word[16*k +: 16] != 16'(ref_c[4*out_idx + k] & 8191)) begin
          failures++;
          $display("FAIL coef %0d: %0d vs %0d", 4*out_idx + k, out_word[16*k +: 16], ref_c[4*out_idx + k] & 8191);
        end
      end
    end
  end

  initial begin
    start = 0; in_valid = 0; w = '0;
    for (int m = 0; m < 256; m++) ref_c[m] = 0;
    for (int k = 0; k < 7; k++) for (int i = 0; i < 64; i++) wm[k][i] = '0;
    for (int p = 0; p < 3; p++) begin
      for (int m = 0; m < 256; m++) begin
        a[p][m] = $urandom_range(0, 8191); b[p][m] = $urandom_range(0, 8) - 4;
      end
      for (int i = 0; i < 256; i++)
        for (int j = 0; j < 256; j++)
          if (i + j < 256) ref_c[i+j] += a[p][i] * b[p][j];
          else ref_c[i+j-256] -= a[p][i] * b[p][j];
      for (int k = 0; k < 7; k++)
        for (int i = 0; i < 64; i++)
          for (int j = 0; j < 64; j++) begin
            automatic int ea = ev(a[p][4*i], a[p][4*i+1], a[p][4*i+2], a[p][4*i+3], k);
            automatic int eb = ev(b[p][4*j], b[p][4*j+1], b[p][4*j+2], b[p][4*j+3], k);
            automatic logic [15:0] pr = 16'(ea * eb);
            if (i + j < 64) wm[k][i+j] += pr; else wm[k][i+j-64] -= pr;
          end
    end
    repeat (2) @(negedge clk); rst_n = 1;
    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    for (int i = 0; i < 64; i++) begin
      in_valid = 1;
      for (int k = 0; k < 7; k++) w[k] = wm[k][i];
      @(negedge clk);
    end
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++; if (nout != 64) begin failures++; $display("FAIL %0d words", nout); end
    for (int i = 0; i < 64; i++) begin
      checks++; if (!seen[i]) begin failures++; $display("FAIL word %0d missing", i); end
    end
    $display("interpolation: last word %0d cycles after the first row", last_cyc);
    checks++; if (last_cyc > 70) begin failures++; $display("FAIL latency %0d", last_cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
