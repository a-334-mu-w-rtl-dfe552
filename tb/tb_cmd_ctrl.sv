// tb_cmd_ctrl: feeds micro-instructions to the command controller and
// checks the decoding of opcode and offsets, the block selected for each
// opcode, the clock-enable / start / done sequence (enable one cycle before
// start, held until done, dropped after), the memory request of Mem Wr
// and Mem Rd, the word handed to the serial interface, the multiplier
// variant outputs and that the controller is busy only while it works.
module tb_cmd_ctrl;
  import saber_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;
  logic cmd_valid, word_valid, ready, vmul_pub16, mem_active, tx_load;
  instr_t cmd;
  logic [WORD_W-1:0] word, rdata_a, tx_word;
  blk_e sel;
  logic [NBLK-1:0] blk_start, blk_clk_en, blk_done;
  opcode_e op;
  logic [ADDR_W-1:0] off1, off2, vmul_stride;
  mem_req_t mem_a;
  cmd_ctrl dut (.*);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic blk_e expect_blk(opcode_e o);
    case (o)
      OP_SHA, OP_SHAKE_EXT: return B_SHA;
      OP_SAMPLER: return B_SAMPLER;
      OP_ADDPACK: return B_ADDPACK;
      OP_ADDROUND: return B_ADDROUND;
      OP_UNPACK: return B_UNPACK;
      OP_VMUL, OP_VMUL_T, OP_VMUL_P: return B_VMUL;
      OP_BS2POLVEC: return B_BS2P;
      OP_VERIFY: return B_VERIFY;
      OP_COPY, OP_CMOV: return B_CMOV;
      default: return B_NONE;
    endcase
  endfunction
  task automatic issue(input opcode_e o, input int o1, input int o2);
    @(negedge clk);
    cmd_valid = 1; cmd = '{op: o, off1: ADDR_W'(o1), off2: ADDR_W'(o2)};
    @(negedge clk); cmd_valid = 0;
    check(op == o && off1 == ADDR_W'(o1) && off2 == ADDR_W'(o2), "decode");
  endtask
  task automatic run_blk(input opcode_e o);
    int o1 = $urandom_range(0, 1023), o2 = $urandom_range(0, 1023), lat = $urandom_range(1, 20);
    blk_e b = expect_blk(o);
    issue(o, o1, o2);
    check(!ready && sel == b && blk_clk_en == (NBLK'(1) << b) && blk_start == '0, "wake");
    @(negedge clk);
    check(blk_start == (NBLK'(1) << b) && blk_clk_en[b], "start");
    if (b == B_VMUL)
      check(vmul_pub16 == (o == OP_VMUL_P) &&
            vmul_stride == ((o == OP_VMUL_P) ? 10'd64 : (o == OP_VMUL_T) ? 10'd156 : 10'd52), "vmul variant");
    @(negedge clk);
    for (int i = 0; i < lat; i++) begin
      check(blk_clk_en[b] && blk_start == '0 && !ready && mem_active, "run");
      @(negedge clk);
    end
    blk_done = NBLK'(1) << b; @(negedge clk); blk_done = '0;
    check(ready && blk_clk_en == '0 && sel == B_NONE && !mem_active, "done");
  endtask
  initial begin
    automatic opcode_e ops[] = '{OP_SHA, OP_SAMPLER, OP_ADDPACK, OP_ADDROUND, OP_UNPACK,
                                 OP_VMUL, OP_VMUL_T, OP_VMUL_P, OP_BS2POLVEC, OP_VERIFY,
                                 OP_COPY, OP_CMOV, OP_SHAKE_EXT};
    cmd_valid = 0; cmd = '0; word_valid = 0; word = 0; rdata_a = 0; blk_done = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    check(ready && !mem_active && blk_clk_en == '0, "idle after reset");
    for (int r = 0; r < 3; r++)
      foreach (ops[i]) run_blk(ops[i]);
    // Mem Wr: waits for the data word, writes it at offset2
    issue(OP_MEM_WR, 5, 777);
    repeat (3) begin check(!ready && !mem_a.en, "memwr wait"); @(negedge clk); end
    word_valid = 1; word = 64'h0123_4567_89ab_cdef; #1;
    check(mem_a.en && mem_a.we && mem_a.addr == 10'd777 && mem_a.wdata == word, "memwr request");
    @(negedge clk); word_valid = 0;
    check(ready, "memwr done");
    // Mem Rd: reads offset1, hands the word to the serial interface
    issue(OP_MEM_RD, 321, 0);
    check(mem_a.en && !mem_a.we && mem_a.addr == 10'd321, "memrd request");
    @(negedge clk); rdata_a = 64'hfeed_face_cafe_beef; #1;
    check(tx_load && tx_word == rdata_a, "memrd tx");
    @(negedge clk);
    check(ready && !tx_load, "memrd done");
    // an unused opcode is ignored
    issue(OP_NOP, 1, 2);
    check(ready && blk_clk_en == '0, "nop ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
