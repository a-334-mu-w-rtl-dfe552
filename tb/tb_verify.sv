// tb_verify: checks the constant-time comparator on equal regions, regions
// differing in one random bit, and that the run time (136 words) does not
// depend on the data.
module tb_verify;
  import saber_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;
  logic start, busy, done, fail;
  logic [ADDR_W-1:0] off1, off2;
  mem_req_t ma, mb;
  logic [63:0] ra, rb;
  sys_sram u_mem (.clk, .req_a(ma), .rdata_a(ra), .req_b(mb), .rdata_b(rb));
  verify dut (.clk, .rst_n, .start, .off1, .off2, .busy, .done, .fail,
              .mem_a(ma), .rdata_a(ra), .mem_b(mb), .rdata_b(rb));
  int checks = 0, failures = 0, cyc0 = -1;
  task automatic go(input int o1, input int o2, input bit exp);
    int cyc = 0;
    @(negedge clk); off1 = o1; off2 = o2; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++; if (fail != exp) begin failures++; $display("FAIL result %0d exp %0d", fail, exp); end
    if (cyc0 < 0) cyc0 = cyc;
    checks++; if (cyc != cyc0 || cyc > 140) begin failures++; $display("FAIL time %0d vs %0d", cyc, cyc0); end
  endtask
  initial begin
    start = 0; off1 = 0; off2 = 0;
    for (int i = 0; i < 136; i++) begin
      u_mem.mem[i] = {$urandom, $urandom}; u_mem.mem[300+i] = u_mem.mem[i];
    end
    repeat (3) @(negedge clk); rst_n = 1;
    go(0, 300, 0);
    for (int t = 0; t < 6; t++) begin
      automatic int w = $urandom_range(0, 135), b = $urandom_range(0, 63);
      u_mem.mem[300+w][b] = ~u_mem.mem[300+w][b];
      go(0, 300, 1);
      u_mem.mem[300+w][b] = ~u_mem.mem[300+w][b];
      go(0, 300, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
