// tb_coeff_decoder: unpacks one 256-coefficient polynomial in each of the
// six formats (1, 4, 8, 10, 13 and 16 bits) from random memory words and
// compares every coefficient with the bits of the LSB-first stream. Each
// format runs once at full rate, where all 64 groups must arrive within 66
// cycles of start, and once with random consumer stalls and random read holds.
module tb_coeff_decoder;
  import saber_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;
  logic start, rd_hold, rd_en, take, valid;
  logic [ADDR_W-1:0] base, rd_addr;
  logic [6:0] nwords;
  cfmt_e fmt;
  logic [WORD_W-1:0] rd_data, unused_b;
  logic [3:0][15:0] coef;
  mem_req_t ma;
  sys_sram u_mem (.clk, .req_a(ma), .rdata_a(rd_data), .req_b(MEM_IDLE), .rdata_b(unused_b));
  assign ma = '{en: rd_en, we: 1'b0, addr: rd_addr, wdata: '0};
  coeff_decoder dut (.clk, .rst_n, .start, .base, .nwords, .fmt, .rd_hold, .rd_en,
                     .rd_addr, .rd_data, .take, .valid, .coef);
  int checks = 0, failures = 0;
  function automatic int width_of(cfmt_e f);
    case (f) F1: return 1; F4: return 4; F8: return 8; F10: return 10; F13: return 13; default: return 16; endcase
  endfunction
  function automatic int bits(input int bw, input int pos, input int n);
    int v = 0;
    for (int k = 0; k < n; k++) v[k] = u_mem.mem[bw + (pos+k)/64][(pos+k)%64];
    return v;
  endfunction
  task automatic run(input cfmt_e f, input int b0, input bit stall);
    int g = 0, cyc = 0, wd = width_of(f);
    @(negedge clk); start = 1; base = ADDR_W'(b0); fmt = f; nwords = 7'(grp_bits(f)); take = 0; rd_hold = 0;
    @(negedge clk); start = 0;
    while (g < 64 && cyc < 1000) begin
      take = stall ? 1'($urandom_range(0, 2) != 0) : 1'b1;
      rd_hold = stall ? 1'($urandom_range(0, 3) == 0) : 1'b0;
      #1;
      if (valid && take) begin
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (int'(coef[k]) != bits(b0, (4*g + k) * wd, wd)) begin
            failures++; $display("FAIL fmt %0d coef %0d", wd, 4*g + k);
          end
        end
        g++;
      end
      @(negedge clk); cyc++;
    end
    take = 0; rd_hold = 0;
    checks++; if (g != 64) begin failures++; $display("FAIL fmt %0d only %0d groups", wd, g); end
    if (!stall) begin
      checks++; if (cyc > 66) begin failures++; $display("FAIL fmt %0d rate: %0d cycles", wd, cyc); end
    end
  endtask
  initial begin
    start = 0; base = 0; nwords = 0; fmt = F16; rd_hold = 0; take = 0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = {$urandom, $urandom};
    repeat (2) @(negedge clk); rst_n = 1;
    run(F1, 3, 0);   run(F4, 40, 0);  run(F8, 100, 0);
    run(F10, 200, 0); run(F13, 300, 0); run(F16, 400, 0);
    run(F1, 500, 1); run(F4, 510, 1); run(F8, 600, 1);
    run(F10, 700, 1); run(F13, 800, 1); run(F16, 900, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
