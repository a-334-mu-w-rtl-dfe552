// tb_serial_if: sends random 24-bit command frames and 64-bit data frames
// LSB first, with random idle gaps, and checks that each arrives in
// parallel form exactly once, one cycle after its last bit; then loads
// random words for transmission and checks the 64 bits shifted out.
module tb_serial_if;
  import saber_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;
  logic s_in, s_valid, s_cmd, s_out, s_out_valid, cmd_valid, word_valid, tx_load;
  instr_t cmd;
  logic [WORD_W-1:0] word, tx_word;
  serial_if dut (.*);
  int checks = 0, failures = 0, ncmd = 0, nword = 0;
  always @(posedge clk) begin
    if (cmd_valid) ncmd++;
    if (word_valid) nword++;
  end
  task automatic send(input bit c, input logic [63:0] v);
    int n = c ? 24 : 64;
    int n0 = ncmd, w0 = nword;
    for (int i = 0; i < n; i++) begin
      s_valid = 1; s_cmd = c; s_in = v[i];
      @(negedge clk);
      s_valid = 0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    s_valid = 0;
    @(negedge clk);
    checks += 2;
    if (c) begin
      if (!(ncmd == n0 + 1 && cmd == instr_t'(v[23:0]))) begin failures++; $display("FAIL cmd"); end
      if (nword != w0) begin failures++; $display("FAIL stray word"); end
    end else begin
      if (!(nword == w0 + 1 && word == v)) begin failures++; $display("FAIL word"); end
      if (ncmd != n0) begin failures++; $display("FAIL stray cmd"); end
    end
  endtask
  initial begin
    s_in = 0; s_valid = 0; s_cmd = 0; tx_load = 0; tx_word = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) send(1'($urandom_range(0, 1)), {$urandom, $urandom});
    for (int t = 0; t < 5; t++) begin
      logic [63:0] v, got;
      v = {$urandom, $urandom};
      tx_load = 1; tx_word = v; @(negedge clk); tx_load = 0;
      for (int i = 0; i < 64; i++) begin
        checks++; if (!s_out_valid) begin failures++; $display("FAIL tx valid"); end
        got[i] = s_out; @(negedge clk);
      end
      checks += 2;
      if (got != v) begin failures++; $display("FAIL tx data"); end
      if (s_out_valid) begin failures++; $display("FAIL tx length"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
