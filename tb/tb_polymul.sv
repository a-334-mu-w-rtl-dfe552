// tb_polymul: self-checking test of the vector multiplier. Random public
// polynomials (13-bit packed, then 16-bit containers with a stride) and
// random secrets in [-4, 4] are written into a system memory model; the
// expected row-column product is computed here by schoolbook negacyclic
// multiplication mod 2^13 and compared word by word with what the
// multiplier writes back. It also checks that each MULT phase lasts exactly
// 1168 cycles (64/n*(n/2+n+64+n-1) with n = 4) and that interpolation
// finishes within 70 cycles.
module tb_polymul;
  import saber_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;

  logic start, pub16, busy, done;
  logic [ADDR_W-1:0] off1, off2, stride;
  pm_state_e st;
  mem_req_t rd, wr;
  logic [63:0] rdata, unused_b;

  sys_sram u_mem (.clk, .req_a(rd), .rdata_a(rdata), .req_b(wr), .rdata_b(unused_b));
  polymul dut (.clk, .rst_n, .start, .pub16, .off1, .off2, .stride, .busy, .done,
               .fsm_state(st), .mem_rd(rd), .mem_rdata(rdata), .mem_wr(wr));

  int checks = 0, failures = 0;
  int a [3][256];
  int s [3][256];
  int expv [256];

  task automatic put_bits(input int base_w, input int bitpos, input int width, input int val);
    for (int b = 0; b < width; b++) begin
      int p = bitpos + b;
      u_mem.mem[base_w + p/64][p%64] = val[b];
    end
  endtask

  task automatic run_case(input bit w16, input int o1, input int o2, input int strd);
    int cyc, mult_cyc, interp_cyc, npass;
    for (int p = 0; p < 3; p++)
      for (int k = 0; k < 256; k++) begin
        a[p][k] = w16 ? $urandom_range(0, 1023) : $urandom_range(0, 8191);
        s[p][k] = $urandom_range(0, 8) - 4;
        put_bits(o1 + p*strd, k*(w16 ? 16 : 13), w16 ? 16 : 13, a[p][k]);
        put_bits(o2 + p*16, k*4, 4, s[p][k] & 15);
      end
    for (int k = 0; k < 256; k++) expv[k] = 0;
    for (int p = 0; p < 3; p++)
      for (int i = 0; i < 256; i++)
        for (int j = 0; j < 256; j++)
          if (i + j < 256) expv[i+j] += a[p][i] * s[p][j];
          else             expv[i+j-256] -= a[p][i] * s[p][j];
    @(negedge clk);
    off1 = o1; off2 = o2; stride = strd; pub16 = w16; start = 1;
    @(negedge clk); start = 0;
    cyc = 0; mult_cyc = 0; interp_cyc = 0; npass = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (st == PM_MULT) mult_cyc++;
      if (st == PM_INTERP) interp_cyc++;
    end
    checks++;
    if (mult_cyc != 3*1168) begin
      failures++; $display("FAIL mult cycles %0d, expected %0d", mult_cyc, 3*1168);
    end
    checks++;
    if (interp_cyc > 70) begin failures++; $display("FAIL interp cycles %0d", interp_cyc); end
    $display("case w16=%0d: total %0d cycles, MULT %0d, INTERP %0d", w16, cyc, mult_cyc, interp_cyc);
    for (int k = 0; k < 256; k++) begin
      logic [15:0] got;
      got = u_mem.mem[o2 + 48 + k/4][(k%4)*16 +: 16];
      checks++;
      if (got != 16'(expv[k] & 8191)) begin
        failures++;
        if (failures < 10) $display("FAIL coef %0d got %0d exp %0d", k, got, expv[k] & 8191);
      end
    end
  endtask

  initial begin
    start = 0; pub16 = 0; off1 = 0; off2 = 0; stride = 0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(1'b0, 0, 200, 52);
    run_case(1'b1, 300, 600, 70);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
