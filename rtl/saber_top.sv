// saber_top: Saber post-quantum KEM accelerator. A host drives it over a
// serial link with 24-bit micro-instructions and 64-bit data words; every
// Saber step (polynomial vector multiplication, sampling, rounding and
// packing, verification, conditional move, hashing) is one instruction
// that works between regions of an 8 KB dual-port system memory, so the
// same hardware runs key generation, encapsulation and decapsulation.
//
// Structure: serial_if -> cmd_ctrl, which starts one block at a time and
// hands it both ports of sys_sram; each block runs on its own gated clock
// (clock_gate), enabled only while the block is in use, and the system
// memory is gated while the controller is idle. The SHA3/SHAKE core is not
// part of this RTL: its start/done, offsets, memory ports and gated clock
// are top-level ports (sha_*), so an external Keccak core can be attached.
// verify_fail shows the result of the last Verify, which also drives CMOV.
module saber_top
  import saber_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // serial host interface
  input  logic              s_in,
  input  logic              s_valid,
  input  logic              s_cmd,
  output logic              s_out,
  output logic              s_out_valid,
  output logic              ready,
  output logic              verify_fail,
  // external SHA3/SHAKE core
  output logic              sha_clk,
  output logic              sha_start,
  output logic              sha_ext,      // SHAKE-from-outside variant
  output logic [ADDR_W-1:0] sha_off1,
  output logic [ADDR_W-1:0] sha_off2,
  input  logic              sha_done,
  input  mem_req_t          sha_mem_a,
  output logic [WORD_W-1:0] sha_rdata_a,
  input  mem_req_t          sha_mem_b,
  output logic [WORD_W-1:0] sha_rdata_b
);
  // serial interface and controller
  logic              cmd_valid, word_valid, tx_load, mem_active;
  instr_t            cmd;
  logic [WORD_W-1:0] word, tx_word;
  blk_e              sel;
  logic [NBLK-1:0]   blk_start, blk_clk_en, blk_done, gclk;
  opcode_e           op;
  logic [ADDR_W-1:0] off1, off2, vmul_stride;
  logic              vmul_pub16;
  mem_req_t          ctrl_mem_a;
  logic [WORD_W-1:0] sram_rdata_a, sram_rdata_b;

  serial_if u_serial (.clk, .rst_n, .s_in, .s_valid, .s_cmd, .s_out, .s_out_valid,
    .cmd_valid, .cmd, .word_valid, .word, .tx_load, .tx_word);

  cmd_ctrl u_ctrl (.clk, .rst_n, .cmd_valid, .cmd, .word_valid, .word, .ready, .sel,
    .blk_start, .blk_clk_en, .blk_done, .op, .off1, .off2, .vmul_pub16, .vmul_stride,
    .mem_active, .mem_a(ctrl_mem_a), .rdata_a(sram_rdata_a), .tx_load, .tx_word);

  // clock gates, one per block and one for the system memory
  for (genvar b = 1; b < NBLK; b++) begin : g_cg
    clock_gate u_cg (.clk, .rst_n, .clk_en(blk_clk_en[b]), .gated_clk(gclk[b]));
  end
  assign gclk[0] = 1'b0;
  assign blk_done[0] = 1'b0;
  logic mem_clk;
  clock_gate u_cg_mem (.clk, .rst_n, .clk_en(mem_active), .gated_clk(mem_clk));

  // system memory and port arbitration
  mem_req_t          sram_a, sram_b;
  mem_req_t          bm_a [NBLK];
  mem_req_t          bm_b [NBLK];

  sys_sram u_sram (.clk(mem_clk), .req_a(sram_a), .rdata_a(sram_rdata_a),
                   .req_b(sram_b), .rdata_b(sram_rdata_b));

  assign bm_a[B_NONE] = ctrl_mem_a;
  assign bm_b[B_NONE] = MEM_IDLE;
  assign bm_a[B_SHA]  = sha_mem_a;
  assign bm_b[B_SHA]  = sha_mem_b;
  assign sram_a = bm_a[sel];
  assign sram_b = bm_b[sel];
  assign sha_rdata_a = sram_rdata_a;
  assign sha_rdata_b = sram_rdata_b;

  // SHA3/SHAKE hook
  assign sha_clk   = gclk[B_SHA];
  assign sha_start = blk_start[B_SHA];
  assign sha_ext   = (op == OP_SHAKE_EXT);
  assign sha_off1  = off1;
  assign sha_off2  = off2;
  assign blk_done[B_SHA] = sha_done;

  // blocks
  logic [NBLK-1:0] unused_busy;
  pm_state_e       pm_state;

  bin_sampler u_sampler (.clk(gclk[B_SAMPLER]), .rst_n, .start(blk_start[B_SAMPLER]),
    .off1, .off2, .busy(unused_busy[B_SAMPLER]), .done(blk_done[B_SAMPLER]),
    .mem_a(bm_a[B_SAMPLER]), .rdata_a(sram_rdata_a), .mem_b(bm_b[B_SAMPLER]), .rdata_b(sram_rdata_b));

  addpack u_addpack (.clk(gclk[B_ADDPACK]), .rst_n, .start(blk_start[B_ADDPACK]),
    .off1, .off2, .busy(unused_busy[B_ADDPACK]), .done(blk_done[B_ADDPACK]),
    .mem_a(bm_a[B_ADDPACK]), .rdata_a(sram_rdata_a), .mem_b(bm_b[B_ADDPACK]), .rdata_b(sram_rdata_b));

  addround u_addround (.clk(gclk[B_ADDROUND]), .rst_n, .start(blk_start[B_ADDROUND]),
    .off1, .off2, .busy(unused_busy[B_ADDROUND]), .done(blk_done[B_ADDROUND]),
    .mem_a(bm_a[B_ADDROUND]), .rdata_a(sram_rdata_a), .mem_b(bm_b[B_ADDROUND]), .rdata_b(sram_rdata_b));

  unpack u_unpack (.clk(gclk[B_UNPACK]), .rst_n, .start(blk_start[B_UNPACK]),
    .off1, .off2, .busy(unused_busy[B_UNPACK]), .done(blk_done[B_UNPACK]),
    .mem_a(bm_a[B_UNPACK]), .rdata_a(sram_rdata_a), .mem_b(bm_b[B_UNPACK]), .rdata_b(sram_rdata_b));

  bs2polvecp u_bs2p (.clk(gclk[B_BS2P]), .rst_n, .start(blk_start[B_BS2P]),
    .off1, .off2, .busy(unused_busy[B_BS2P]), .done(blk_done[B_BS2P]),
    .mem_a(bm_a[B_BS2P]), .rdata_a(sram_rdata_a), .mem_b(bm_b[B_BS2P]), .rdata_b(sram_rdata_b));

  polymul u_polymul (.clk(gclk[B_VMUL]), .rst_n, .start(blk_start[B_VMUL]),
    .pub16(vmul_pub16), .off1, .off2, .stride(vmul_stride),
    .busy(unused_busy[B_VMUL]), .done(blk_done[B_VMUL]), .fsm_state(pm_state),
    .mem_rd(bm_a[B_VMUL]), .mem_rdata(sram_rdata_a), .mem_wr(bm_b[B_VMUL]));

  verify u_verify (.clk(gclk[B_VERIFY]), .rst_n, .start(blk_start[B_VERIFY]),
    .off1, .off2, .busy(unused_busy[B_VERIFY]), .done(blk_done[B_VERIFY]), .fail(verify_fail),
    .mem_a(bm_a[B_VERIFY]), .rdata_a(sram_rdata_a), .mem_b(bm_b[B_VERIFY]), .rdata_b(sram_rdata_b));

  cmov u_cmov (.clk(gclk[B_CMOV]), .rst_n, .start(blk_start[B_CMOV]),
    .flag(verify_fail), .force_mv(op == OP_COPY), .off1, .off2,
    .busy(unused_busy[B_CMOV]), .done(blk_done[B_CMOV]),
    .mem_a(bm_a[B_CMOV]), .rdata_a(sram_rdata_a), .mem_b(bm_b[B_CMOV]), .rdata_b(sram_rdata_b));

  assign unused_busy[B_NONE] = 1'b0;
  assign unused_busy[B_SHA]  = 1'b0;
endmodule
