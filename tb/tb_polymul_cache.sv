// tb_polymul_cache: random traffic on the evaluation cache (both ports)
// and the result cache, checked against an array model with one cycle of
// read latency; checks that clear makes every result row read as zero
// until it is written again.
module tb_polymul_cache;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;
  logic ea_en, ea_we, eb_en, clear, rr_en, rw_en;
  logic [6:0] ea_addr, eb_addr;
  logic [5:0] rr_addr, rw_addr;
  logic [111:0] ea_wdata, ea_rdata, eb_rdata, rr_rdata, rw_wdata;
  polymul_cache dut (.*);
  logic [111:0] em [96];
  logic [111:0] rm [64];
  bit rv [64];
  int checks = 0, failures = 0;
  function automatic logic [111:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction
  initial begin
    ea_en = 0; ea_we = 0; eb_en = 0; clear = 0; rr_en = 0; rw_en = 0;
    ea_addr = 0; eb_addr = 0; rr_addr = 0; rw_addr = 0; ea_wdata = 0; rw_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 96; i++) begin
      em[i] = rnd(); ea_en = 1; ea_we = 1; ea_addr = 7'(i); ea_wdata = em[i];
      if (i < 64) begin rm[i] = rnd(); rv[i] = 1; rw_en = 1; rw_addr = 6'(i); rw_wdata = rm[i]; end
      else rw_en = 0;
      @(negedge clk);
    end
    ea_en = 0; rw_en = 0;
    for (int t = 0; t < 400; t++) begin
      automatic int x = $urandom_range(0, 95), y = $urandom_range(0, 95), z = $urandom_range(0, 63);
      automatic int wz = $urandom_range(0, 63);
      automatic bit wr = $urandom_range(0, 1);
      ea_en = 1; ea_we = 0; ea_addr = 7'(x); eb_en = 1; eb_addr = 7'(y);
      rr_en = 1; rr_addr = 6'(z); rw_en = wr && (wz != z); rw_addr = 6'(wz); rw_wdata = rnd();
      if (t == 200) begin clear = 1; rw_en = 0; end
      @(negedge clk);
      ea_en = 0; eb_en = 0; rr_en = 0; rw_en = 0;
      checks += 3;
      if (ea_rdata != em[x]) begin failures++; $display("FAIL ea %0d", x); end
      if (eb_rdata != em[y]) begin failures++; $display("FAIL eb %0d", y); end
      if (rr_rdata != (rv[z] ? rm[z] : '0)) begin failures++; $display("FAIL rr %0d", z); end
      if (clear) begin
        clear = 0;
        for (int i = 0; i < 64; i++) rv[i] = 0;
      end else if (wr && wz != z) begin rm[wz] = rw_wdata; rv[wz] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
