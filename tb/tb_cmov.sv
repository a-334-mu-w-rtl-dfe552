// tb_cmov: checks that the conditional move copies 4 words when flag or
// force is set, leaves the destination alone otherwise, never touches the
// source or the words after the destination, and takes the same time either way.
module tb_cmov;
  import saber_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;
  logic start, busy, done, flag, force_mv;
  logic [ADDR_W-1:0] off1, off2;
  mem_req_t ma, mb;
  logic [63:0] ra, rb;
  logic [63:0] src [5];
  logic [63:0] dst [5];
  sys_sram u_mem (.clk, .req_a(ma), .rdata_a(ra), .req_b(mb), .rdata_b(rb));
  cmov dut (.clk, .rst_n, .start, .flag, .force_mv, .off1, .off2, .busy, .done,
            .mem_a(ma), .rdata_a(ra), .mem_b(mb), .rdata_b(rb));
  int checks = 0, failures = 0;
  task automatic go(input bit f, input bit fo);
    int cyc = 0;
    for (int i = 0; i < 5; i++) begin
      src[i] = {$urandom, $urandom}; dst[i] = {$urandom, $urandom};
      u_mem.mem[10+i] = src[i]; u_mem.mem[50+i] = dst[i];
    end
    @(negedge clk); off1 = 10; off2 = 50; flag = f; force_mv = fo; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (u_mem.mem[50+i] != ((f | fo) ? src[i] : dst[i])) begin failures++; $display("FAIL word %0d", i); end
      checks++;
      if (u_mem.mem[10+i] != src[i]) begin failures++; $display("FAIL source changed"); end
    end
    checks++; if (u_mem.mem[54] != dst[4]) begin failures++; $display("FAIL overrun"); end
    checks++; if (cyc != 8) begin failures++; $display("FAIL time %0d", cyc); end
  endtask
  initial begin
    start = 0; off1 = 0; off2 = 0; flag = 0; force_mv = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    go(0, 0); go(1, 0); go(0, 1); go(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
