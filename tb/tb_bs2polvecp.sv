// tb_bs2polvecp: self-checking test of bs2polvecp, which converts 10-bit packed coefficients into 16-bit containers.
// Random input polynomials are written into a system memory model, the
// block is started twice (two random data sets), and every output
// coefficient is compared with a value computed here from the inputs. The
// run time is also checked: four coefficients per cycle means a polynomial
// must finish within 80 cycles.
module tb_bs2polvecp;
  import saber_pkg::*;
  localparam int O1 = 100, O2 = 400;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;
  logic start, busy, done;
  logic [ADDR_W-1:0] off1, off2;
  mem_req_t ma, mb;
  logic [63:0] ra, rb;
  sys_sram u_mem (.clk, .req_a(ma), .rdata_a(ra), .req_b(mb), .rdata_b(rb));
  bs2polvecp dut (.clk, .rst_n, .start, .off1, .off2, .busy, .done,
    .mem_a(ma), .rdata_a(ra), .mem_b(mb), .rdata_b(rb));

  int checks = 0, failures = 0;
  int x [256];
  int y [256];

  task automatic setb(input int bw, input int pos, input int width, input int val);
    for (int b = 0; b < width; b++) u_mem.mem[bw + (pos+b)/64][(pos+b)%64] = val[b];
  endtask
  function automatic int getb(input int bw, input int pos, input int width);
    int v = 0;
    for (int b = 0; b < width; b++) v[b] = u_mem.mem[bw + (pos+b)/64][(pos+b)%64];
    return v;
  endfunction

  task automatic run_once();
    int cyc, e, g;
    for (int k = 0; k < 256; k++) begin x[k] = $urandom_range(0, 1023); setb(O1, k*10, 10, x[k]); end
    @(negedge clk); off1 = O1; off2 = O2; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > 80) begin failures++; $display("FAIL took %0d cycles", cyc); end
    for (int k = 0; k < 256; k++) begin
      e = x[k]; g = getb(O2, k*16, 16);
      checks++;
      if (g != e) begin
        failures++;
        if (failures < 8) $display("FAIL coef %0d: got %0d expected %0d", k, g, e);
      end
    end
  endtask

  initial begin
    start = 0; off1 = 0; off2 = 0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_once();
    run_once();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
