// tb_saber_top: end-to-end test of the Saber accelerator at its default
// sizes. A host model sends micro-instructions and data words over the
// serial link and runs a chain of Saber steps on random data: Mem Wr and
// Mem Rd, the SHA/SHAKE hook (answered by a stand-in that only pulses done),
// three binomial samplings, the vector multiplier in all three operand
// variants, AddRound, BS2PolVecP, AddPack, Unpack (which must give the
// message back), Verify (equal and different regions), CMOV (flag clear
// and set) and Copy. Before each instruction the memory is copied and the
// expected result is computed here from that copy with plain reference
// code (schoolbook negacyclic product, bit-level packing), then compared
// with the memory after the instruction. It also counts the mechanisms
// (each opcode, both Verify outcomes, both CMOV outcomes, clock gating of
// the idle multiplier and of its caches while its FSM waits, the memory
// clock being stopped while idle, the MAC
// passes and interpolations of the multiplier, which must come three to
// one for lazy interpolation) and counts a failure for any that never
// happened.
module tb_saber_top;
  import saber_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // power-on reset: a real falling edge, so gated blocks reset too
  always #5 clk = ~clk;

  logic s_in, s_valid, s_cmd, s_out, s_out_valid, ready, verify_fail;
  logic sha_clk, sha_start, sha_ext, sha_done;
  logic [ADDR_W-1:0] sha_off1, sha_off2;
  mem_req_t sha_mem_a, sha_mem_b;
  logic [63:0] sha_rdata_a, sha_rdata_b;

  saber_top dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] snap [1024];
  int mech [string];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int gb(input int bw, input int pos, input int width);
    int v = 0;
    for (int b = 0; b < width; b++) v[b] = snap[(bw + (pos+b)/64) % 1024][(pos+b)%64];
    return v;
  endfunction
  function automatic int mb(input int bw, input int pos, input int width);
    int v = 0;
    for (int b = 0; b < width; b++) v[b] = dut.u_sram.mem[(bw + (pos+b)/64) % 1024][(pos+b)%64];
    return v;
  endfunction

  // SHA/SHAKE stand-in: answers start with done a few cycles later
  initial begin
    sha_done = 0; sha_mem_a = MEM_IDLE; sha_mem_b = MEM_IDLE;
    forever begin
      @(posedge sha_clk);
      if (sha_start) begin
        repeat (5) @(posedge clk);
        sha_done = 1; @(posedge clk); #1 sha_done = 0;
      end
    end
  end

  task automatic send_bits(input bit cmd, input int n, input logic [63:0] v);
    for (int b = 0; b < n; b++) begin
      @(negedge clk); s_valid = 1; s_cmd = cmd; s_in = v[b];
    end
    @(negedge clk); s_valid = 0;
  endtask

  task automatic run(input opcode_e op, input int o1, input int o2);
    instr_t ins;
    for (int i = 0; i < 1024; i++) snap[i] = dut.u_sram.mem[i];
    ins.op = op; ins.off1 = ADDR_W'(o1); ins.off2 = ADDR_W'(o2);
    send_bits(1, 24, 64'(ins));
    repeat (2) @(negedge clk);
    while (!ready) @(negedge clk);
    mech[op.name()]++;
  endtask

  task automatic mem_wr(input int o2, input logic [63:0] v);
    instr_t ins;
    ins.op = OP_MEM_WR; ins.off1 = '0; ins.off2 = ADDR_W'(o2);
    send_bits(1, 24, 64'(ins));
    send_bits(0, 64, v);
    repeat (2) @(negedge clk);
    while (!ready) @(negedge clk);
    mech["OP_MEM_WR"]++;
  endtask

  // ---------- reference models ----------
  task automatic chk_vmul(input int o1, input int o2, input int stride, input int w);
    int e [256];
    for (int k = 0; k < 256; k++) e[k] = 0;
    for (int p = 0; p < 3; p++)
      for (int i = 0; i < 256; i++) begin
        int a = gb(o1 + p*stride, i*w, w);
        for (int j = 0; j < 256; j++) begin
          int s = gb(o2 + 16*p, j*4, 4);
          if (s > 7) s -= 16;
          if (i + j < 256) e[i+j] += a*s; else e[i+j-256] -= a*s;
        end
      end
    for (int k = 0; k < 256; k++)
      check(mb(o2 + 48, k*16, 16) == (e[k] & 8191), $sformatf("vmul coef %0d", k));
  endtask

  initial begin
    logic [63:0] w0, w1, got;
    int e, g, nw;
    s_in = 0; s_valid = 0; s_cmd = 0;
    for (int i = 0; i < 1024; i++) dut.u_sram.mem[i] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // Mem Wr / Mem Rd over the serial link
    w0 = {$urandom, $urandom}; w1 = {$urandom, $urandom};
    mem_wr(1000, w0);
    mem_wr(1001, w1);
    check(dut.u_sram.mem[1000] == w0 && dut.u_sram.mem[1001] == w1, "mem wr");
    begin
      instr_t ins;
      ins.op = OP_MEM_RD; ins.off1 = 10'd1001; ins.off2 = '0;
      send_bits(1, 24, 64'(ins));
      while (!s_out_valid) @(negedge clk);
      for (int b = 0; b < 64; b++) begin got[b] = s_out; @(negedge clk); end
      check(got == w1, "mem rd serial out");
      mech["OP_MEM_RD"]++;
    end

    // SHA / SHAKE hook
    run(OP_SHA, 5, 6);
    run(OP_SHAKE_EXT, 5, 6);

    // binomial sampling of three secrets from the random bytes at 468..
    for (int p = 0; p < 3; p++) begin
      run(OP_SAMPLER, 468 + 32*p, 564 + 16*p);
      for (int k = 0; k < 256; k++) begin
        e = gb(468 + 32*p, k*8, 8);
        e = ($countones(e & 15) - $countones(e >> 4)) & 15;
        check(mb(564 + 16*p, k*4, 4) == e, "sampler");
      end
    end

    // A^T s row 0 (transposed access), then AddRound and BS2PolVecP
    run(OP_VMUL_T, 0, 564);  chk_vmul(0, 564, 156, 13);
    run(OP_ADDROUND, 612, 676);
    for (int k = 0; k < 256; k++)
      check(mb(676, k*10, 10) == ((gb(612, k*16, 16) + 4) % 8192) >> 3, "addround");
    run(OP_BS2POLVEC, 676, 716);
    for (int k = 0; k < 256; k++)
      check(mb(716, k*16, 16) == gb(676, k*10, 10), "bs2polvecp");

    // A s row 1 (consecutive), then b^T s with 16-bit operands
    run(OP_VMUL, 52*3, 564);  chk_vmul(156, 564, 52, 13);
    run(OP_VMUL_P, 716, 564); chk_vmul(716, 564, 64, 16);

    // AddPack with a message, Unpack must return it
    run(OP_ADDPACK, 612, 908);
    for (int k = 0; k < 256; k++) begin
      e = (((gb(612, k*16, 16) + 4 - 512*gb(908, k, 1)) % 1024 + 1024) % 1024) >> 6;
      check(mb(912, k*4, 4) == e, "addpack");
    end
    run(OP_UNPACK, 612, 912);
    for (int k = 0; k < 256; k++) begin
      e = (((gb(612, k*16, 16) - 64*gb(912, k*4, 4) + 228) % 1024 + 1024) % 1024) >> 9;
      check(mb(928, k, 1) == e, "unpack");
      check(mb(928, k, 1) == gb(908, k, 1), "message round trip");
    end

    // Verify: equal regions, then different regions
    run(OP_VERIFY, 200, 200);
    check(verify_fail == 1'b0, "verify equal");
    if (!verify_fail) mech["verify_pass"]++;
    run(OP_CMOV, 300, 40);   // flag clear: destination unchanged
    for (int i = 0; i < 4; i++) check(dut.u_sram.mem[40+i] == snap[40+i], "cmov keep");
    if (dut.u_sram.mem[40] == snap[40]) mech["cmov_keep"]++;
    run(OP_VERIFY, 200, 201);
    e = 0;
    for (int i = 0; i < 136; i++) if (snap[200+i] != snap[201+i]) e = 1;
    check(verify_fail == 1'(e), "verify differ");
    if (verify_fail) mech["verify_fail"]++;
    run(OP_CMOV, 300, 40);   // flag set: z replaces the key
    for (int i = 0; i < 4; i++) check(dut.u_sram.mem[40+i] == snap[300+i], "cmov move");
    if (dut.u_sram.mem[40] == snap[300]) mech["cmov_move"]++;
    run(OP_VERIFY, 200, 200);
    run(OP_COPY, 310, 50);
    for (int i = 0; i < 4; i++) check(dut.u_sram.mem[50+i] == snap[310+i], "copy");

    // mechanisms that must have happened
    foreach (mech[k]) $display("  %-14s %0d", k, mech[k]);
    check(mech["mac_pass"] == 3 * mech["lazy_interp"], "three MAC passes per interpolation");
    check(mech["lazy_interp"] == mech["OP_VMUL"] + mech["OP_VMUL_T"] + mech["OP_VMUL_P"],
          "one interpolation per vector product");
    foreach (need[i]) begin
      checks++;
      if (!mech.exists(need[i])) begin failures++; $display("FAIL never happened: %s", need[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string need [] = '{"OP_MEM_WR", "OP_MEM_RD", "OP_SHA", "OP_SHAKE_EXT", "OP_SAMPLER",
                     "OP_VMUL", "OP_VMUL_T", "OP_VMUL_P", "OP_ADDROUND", "OP_BS2POLVEC",
                     "OP_ADDPACK", "OP_UNPACK", "OP_VERIFY", "OP_CMOV", "OP_COPY",
                     "verify_pass", "verify_fail", "cmov_keep", "cmov_move",
                     "vmul_clock_gated", "mem_clock_gated", "sha_ext_seen", "cache_clock_gated",
                     "mac_pass", "lazy_interp"};

  // lazy interpolation: three MAC passes accumulate, then one interpolation
  always @(posedge clk) begin
    if (dut.u_polymul.state_q == PM_MULT && dut.u_polymul.c_q == 7'd0 && dut.u_polymul.g_q == 4'd0)
      mech["mac_pass"]++;
    if (dut.u_polymul.state_q == PM_INTERP && dut.u_polymul.ic_q == 7'd0)
      mech["lazy_interp"]++;
  end

  // clock gating and SHAKE-variant observations
  always @(posedge clk) begin
    if (dut.u_ctrl.sel == B_SAMPLER && !dut.gclk[B_VMUL]) mech["vmul_clock_gated"]++;
    if (ready && !dut.u_ctrl.mem_active) mech["mem_clock_gated"]++;
    // multiplier clocked but its caches stopped (FSM waiting)
    if (dut.u_polymul.u_cache_cg.en_q == 1'b0 && dut.g_cg[B_VMUL].u_cg.en_q == 1'b1)
      mech["cache_clock_gated"]++;
    if (sha_start && sha_ext) mech["sha_ext_seen"]++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
