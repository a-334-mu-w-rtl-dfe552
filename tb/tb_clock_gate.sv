// tb_clock_gate: drives random enables and checks that the gated clock
// carries a rising edge exactly for the clock cycles whose enable was set
// before the preceding falling edge, and no glitch otherwise.
module tb_clock_gate;
  logic clk = 0, rst_n = 1, en = 0, gclk;
  initial #1 rst_n = 0;   // power-on reset edge
  always #5 clk = ~clk;
  clock_gate dut (.clk, .rst_n, .clk_en(en), .gated_clk(gclk));
  int checks = 0, failures = 0, edges = 0;
  always @(posedge gclk) edges++;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic bit e = $urandom_range(0, 1);
      int e0;
      @(posedge clk); #1 en = e;           // set after a rising edge
      e0 = edges;
      @(posedge clk); #1;
      checks++;
      if ((edges - e0) != int'(e)) begin failures++; $display("FAIL cycle %0d en=%0d", t, e); end
      checks++;
      if (gclk != e) begin failures++; $display("FAIL level"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
