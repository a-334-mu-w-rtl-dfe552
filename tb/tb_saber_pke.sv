// tb_saber_pke: workload test of the accelerator at its default sizes. It
// runs the arithmetic core of Saber key generation, encryption and
// decryption (Saber.PKE, l = 3) through the serial link, as a host would,
// with every polynomial in the 1K-word system memory at once:
//   KeyGen : s = sample(noise); b = round(A^T s + h1)        (VMUL_T, AddRound)
//   Encrypt: s' = sample(noise'); b' = round(A s' + h1)      (VMUL, AddRound)
//            v' = b^T s' (BS2PolVecP, VMUL_P); c_m = AddPack(v', m)
//   Decrypt: v = b'^T s (BS2PolVecP, VMUL_P); m' = Unpack(v, c_m)
// The hash and XOF outputs (the matrix A and the noise bytes) come from the
// host model as random data, since the SHA3/SHAKE core is outside the
// design. b, b', c_m and m' are compared with a plain reference model, and
// m' must equal m. The cycles spent in the accelerator's own instructions
// (command to ready, serial loading excluded) are printed per phase and
// must stay below the published totals for KeyGen, Encaps and Decaps,
// which also include hashing.
//
// Memory map (64-bit words): A 0..467 (A[i][j] at 52*(3i+j)), s 468..515,
// product 516..579, noise 580..611, b 612..731, s' 732..779, product
// 780..843, b' 844..963, m 964..967, c_m 968..983, m' 984..987; the 16-bit
// copies of b and b' reuse 0..191 once A is no longer needed.
module tb_saber_pke;
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

  localparam int A_AT = 0, S_AT = 468, NOISE_AT = 580, B_AT = 612, SP_AT = 732,
                 BP_AT = 844, M_AT = 964;

  int checks = 0, failures = 0;
  int acyc = 0;                       // cycles of the current phase's instructions
  int amat [3][3][256];
  int s [3][256];
  int sp [3][256];
  int b [3][256];
  int bp [3][256];
  int msg [256];
  int vp [256];
  int v [256];
  int cm [256];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int mb(input int bw, input int pos, input int width);
    int x = 0;
    for (int k = 0; k < width; k++) x[k] = dut.u_sram.mem[bw + (pos+k)/64][(pos+k)%64];
    return x;
  endfunction

  // nothing in this flow uses the SHA core
  assign sha_done = 1'b0;
  assign sha_mem_a = MEM_IDLE;
  assign sha_mem_b = MEM_IDLE;

  task automatic send_bits(input bit cmd, input int n, input logic [63:0] x);
    for (int k = 0; k < n; k++) begin
      @(negedge clk); s_valid = 1; s_cmd = cmd; s_in = x[k];
    end
    @(negedge clk); s_valid = 0;
  endtask

  task automatic mem_wr(input int addr, input logic [63:0] x);
    instr_t ins;
    ins.op = OP_MEM_WR; ins.off1 = '0; ins.off2 = ADDR_W'(addr);
    send_bits(1, 24, 64'(ins));
    send_bits(0, 64, x);
    repeat (2) @(negedge clk);
    while (!ready) @(negedge clk);
  endtask

  // writes n coefficients of the given width, packed LSB first, from base
  task automatic write_poly(input int base, input int width, input int c [256]);
    logic [63:0] w;
    int bit_no;
    for (int wd = 0; wd < width * 4; wd++) begin
      for (int k = 0; k < 64; k++) begin
        bit_no = wd * 64 + k;
        w[k] = c[bit_no / width][bit_no % width];
      end
      mem_wr(base + wd, w);
    end
  endtask

  // one accelerator instruction; its cycles (command shifted in to ready) count
  task automatic run(input opcode_e op, input int o1, input int o2);
    instr_t ins;
    int t0 = $time;
    ins.op = op; ins.off1 = ADDR_W'(o1); ins.off2 = ADDR_W'(o2);
    send_bits(1, 24, 64'(ins));
    repeat (2) @(negedge clk);
    while (!ready) @(negedge clk);
    acyc += ($time - t0) / 10;
  endtask

  // three noise polynomials: 256 random bytes each through the sampler
  task automatic sample(input int dst, output int sec [3][256]);
    int bytes [256];
    for (int p = 0; p < 3; p++) begin
      for (int k = 0; k < 256; k++) bytes[k] = $urandom_range(0, 255);
      write_poly(NOISE_AT, 8, bytes);
      run(OP_SAMPLER, NOISE_AT, dst + 16*p);
      for (int k = 0; k < 256; k++)
        sec[p][k] = $countones(bytes[k] & 15) - $countones(bytes[k] >> 4);
    end
  endtask

  // r = sum_p x[p] * y[p] modulo x^256 + 1 (plain integers)
  task automatic vecmul(input int x [3][256], input int y [3][256], output int r [256]);
    for (int k = 0; k < 256; k++) r[k] = 0;
    for (int p = 0; p < 3; p++)
      for (int i = 0; i < 256; i++)
        for (int j = 0; j < 256; j++)
          if (i + j < 256) r[i+j] += x[p][i] * y[p][j];
          else r[i+j-256] -= x[p][i] * y[p][j];
  endtask

  initial begin
    int col [3][256];
    int r [256];
    int kg, enc, dec;
    s_in = 0; s_valid = 0; s_cmd = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- public matrix A (would come from SHAKE-128 of the seed) ----
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        for (int k = 0; k < 256; k++) amat[i][j][k] = $urandom_range(0, 8191);
        write_poly(A_AT + 52 * (3*i + j), 13, amat[i][j]);
      end

    // ---- KeyGen: b = ((A^T s + h1) mod q) >> 3 ----
    acyc = 0;
    sample(S_AT, s);
    for (int j = 0; j < 3; j++) begin
      run(OP_VMUL_T, A_AT + 52*j, S_AT);
      run(OP_ADDROUND, S_AT + 48, B_AT + 40*j);
      for (int i = 0; i < 3; i++) col[i] = amat[i][j];
      vecmul(col, s, r);
      for (int k = 0; k < 256; k++) begin
        b[j][k] = ((r[k] + 4) & 8191) >> 3;
        check(mb(B_AT + 40*j, 10*k, 10) == b[j][k], $sformatf("b[%0d][%0d]", j, k));
      end
    end
    kg = acyc;

    // ---- Encrypt: b' = ((A s' + h1) mod q) >> 3, v' = b^T s', c_m ----
    acyc = 0;
    sample(SP_AT, sp);
    for (int i = 0; i < 3; i++) begin
      run(OP_VMUL, A_AT + 156*i, SP_AT);
      run(OP_ADDROUND, SP_AT + 48, BP_AT + 40*i);
      for (int j = 0; j < 3; j++) col[j] = amat[i][j];
      vecmul(col, sp, r);
      for (int k = 0; k < 256; k++) begin
        bp[i][k] = ((r[k] + 4) & 8191) >> 3;
        check(mb(BP_AT + 40*i, 10*k, 10) == bp[i][k], $sformatf("b'[%0d][%0d]", i, k));
      end
    end
    for (int j = 0; j < 3; j++) run(OP_BS2POLVEC, B_AT + 40*j, 64*j);   // A is free now
    run(OP_VMUL_P, 0, SP_AT);
    for (int k = 0; k < 256; k++) msg[k] = $urandom_range(0, 1);
    write_poly(M_AT, 1, msg);            // loading is not counted
    run(OP_ADDPACK, SP_AT + 48, M_AT);
    vecmul(b, sp, vp);
    for (int k = 0; k < 256; k++) begin
      cm[k] = ((vp[k] + 4 - 512 * msg[k]) & 1023) >> 6;
      check(mb(M_AT + 4, 4*k, 4) == cm[k], $sformatf("c_m[%0d]", k));
    end
    enc = acyc;

    // ---- Decrypt: v = b'^T s, m' = ((v - 2^6 c_m + h2) mod p) >> 9 ----
    acyc = 0;
    for (int i = 0; i < 3; i++) run(OP_BS2POLVEC, BP_AT + 40*i, 64*i);
    run(OP_VMUL_P, 0, S_AT);
    run(OP_UNPACK, S_AT + 48, M_AT + 4);
    vecmul(bp, s, v);
    for (int k = 0; k < 256; k++) begin
      check(mb(M_AT + 20, k, 1) == (((v[k] - 64 * cm[k] + 228) & 1023) >> 9), $sformatf("m'[%0d] model", k));
      check(mb(M_AT + 20, k, 1) == msg[k], $sformatf("m'[%0d] recovered", k));
    end
    dec = acyc;

    $display("accelerator cycles: KeyGen core %0d, Encrypt core %0d, Decrypt core %0d", kg, enc, dec);
    $display("published totals with hashing: KeyGen 14642, Encaps 18984, Decaps 23388");
    check(kg < 14642, "KeyGen core within the published KeyGen total");
    check(enc < 18984, "Encrypt core within the published Encaps total");
    check(enc + dec < 23388, "re-encryption and decryption within the published Decaps total");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
