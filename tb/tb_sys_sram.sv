// tb_sys_sram: writes random words through both ports and reads them back
// through both, checking the one-cycle read latency, the full address
// range and that a read in the cycle of a write to the same address returns
// the old word.
module tb_sys_sram;
  import saber_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  mem_req_t ra, rb;
  logic [63:0] da, db;
  logic [63:0] model [1024];
  sys_sram dut (.clk, .req_a(ra), .rdata_a(da), .req_b(rb), .rdata_b(db));
  int checks = 0, failures = 0;
  initial begin
    ra = MEM_IDLE; rb = MEM_IDLE;
    for (int i = 0; i < 1024; i += 2) begin
      model[i] = {$urandom, $urandom}; model[i+1] = {$urandom, $urandom};
      @(negedge clk);
      ra = '{en: 1, we: 1, addr: 10'(i), wdata: model[i]};
      rb = '{en: 1, we: 1, addr: 10'(i+1), wdata: model[i+1]};
    end
    @(negedge clk); ra = MEM_IDLE; rb = MEM_IDLE;
    for (int t = 0; t < 300; t++) begin
      automatic int x = $urandom_range(0, 1023), y = $urandom_range(0, 1023);
      @(negedge clk);
      ra = '{en: 1, we: 0, addr: 10'(x), wdata: '0};
      rb = '{en: 1, we: 0, addr: 10'(y), wdata: '0};
      @(negedge clk); ra = MEM_IDLE; rb = MEM_IDLE;
      checks += 2;
      if (da != model[x]) begin failures++; $display("FAIL A %0d", x); end
      if (db != model[y]) begin failures++; $display("FAIL B %0d", y); end
    end
    // read-during-write on the other port returns the old word
    @(negedge clk);
    ra = '{en: 1, we: 1, addr: 10'd7, wdata: 64'h1234};
    rb = '{en: 1, we: 0, addr: 10'd7, wdata: '0};
    @(negedge clk); ra = MEM_IDLE; rb = MEM_IDLE;
    checks++; if (db != model[7]) begin failures++; $display("FAIL rdw"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
