// cmd_ctrl: command controller of the Saber accelerator. It takes the 24-bit
// micro-instructions (bits 3..0 opcode, 13..4 offset1, 23..14 offset2)
// delivered by the serial interface and runs them one at a time:
//  - Mem Wr (0000): the next 64-bit data word from the serial interface is
//    written to memory at offset2 (the output offset);
//  - Mem Rd (0001): the word at offset1 is read and handed to the serial
//    interface for shifting out;
//  - every other opcode starts one block: its clock enable is raised (WAKE),
//    one cycle later its start pulses with the two offsets (START), and the
//    controller waits for its done (RUN), then drops the clock enable.
// The controller also tells the top which block owns the memory ports (sel)
// and, for the vector multiplier, the public-operand format and stride
// chosen by the opcode variant. Instructions are accepted only while idle
// (ready high). The opcode table and the offset roles follow the paper;
// the state sequence, the one-word Mem Wr/Mem Rd and the multiplier opcode
// variants are this design's choices.
module cmd_ctrl
  import saber_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  instr_t            cmd,
  input  logic              word_valid,
  input  logic [WORD_W-1:0] word,
  output logic              ready,
  output blk_e              sel,
  output logic [NBLK-1:0]   blk_start,
  output logic [NBLK-1:0]   blk_clk_en,
  input  logic [NBLK-1:0]   blk_done,
  output opcode_e           op,
  output logic [ADDR_W-1:0] off1,
  output logic [ADDR_W-1:0] off2,
  output logic              vmul_pub16,
  output logic [ADDR_W-1:0] vmul_stride,
  output logic              mem_active,   // clock enable of the system memory
  output mem_req_t          mem_a,
  input  logic [WORD_W-1:0] rdata_a,
  output logic              tx_load,
  output logic [WORD_W-1:0] tx_word
);
  typedef enum logic [2:0] {C_IDLE, C_MEMWR, C_MEMRD, C_MEMRD_TX, C_WAKE, C_START, C_RUN} cst_e;
  cst_e state_q;
  blk_e blk_q;

  function automatic blk_e blk_of(input opcode_e o);
    unique case (o)
      OP_SHA, OP_SHAKE_EXT:        return B_SHA;
      OP_SAMPLER:                  return B_SAMPLER;
      OP_ADDPACK:                  return B_ADDPACK;
      OP_ADDROUND:                 return B_ADDROUND;
      OP_UNPACK:                   return B_UNPACK;
      OP_VMUL, OP_VMUL_T, OP_VMUL_P: return B_VMUL;
      OP_BS2POLVEC:                return B_BS2P;
      OP_VERIFY:                   return B_VERIFY;
      OP_COPY, OP_CMOV:            return B_CMOV;
      default:                     return B_NONE;
    endcase
  endfunction

  assign ready = (state_q == C_IDLE);
  assign sel = blk_q;
  assign vmul_pub16 = (op == OP_VMUL_P);
  assign vmul_stride = (op == OP_VMUL_P) ? ADDR_W'(W_POLY16) :
                       (op == OP_VMUL_T) ? ADDR_W'(3 * W_POLY13) : ADDR_W'(W_POLY13);
  assign mem_active = (state_q != C_IDLE);
  assign tx_word = rdata_a;
  assign tx_load = (state_q == C_MEMRD_TX);

  always_comb begin
    blk_start  = '0;
    blk_clk_en = '0;
    if (state_q inside {C_WAKE, C_START, C_RUN}) blk_clk_en[blk_q] = 1'b1;
    if (state_q == C_START) blk_start[blk_q] = 1'b1;
    mem_a = MEM_IDLE;
    if (state_q == C_MEMWR && word_valid) begin
      mem_a.en = 1'b1; mem_a.we = 1'b1; mem_a.addr = off2; mem_a.wdata = word;
    end
    if (state_q == C_MEMRD) begin
      mem_a.en = 1'b1; mem_a.addr = off1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= C_IDLE; blk_q <= B_NONE; op <= OP_NOP; off1 <= '0; off2 <= '0;
    end else begin
      unique case (state_q)
        C_IDLE: if (cmd_valid) begin
          op <= cmd.op; off1 <= cmd.off1; off2 <= cmd.off2;
          blk_q <= blk_of(cmd.op);
          if (cmd.op == OP_MEM_WR)      state_q <= C_MEMWR;
          else if (cmd.op == OP_MEM_RD) state_q <= C_MEMRD;
          else if (blk_of(cmd.op) != B_NONE) state_q <= C_WAKE;
        end
        C_MEMWR:    if (word_valid) state_q <= C_IDLE;
        C_MEMRD:    state_q <= C_MEMRD_TX;
        C_MEMRD_TX: state_q <= C_IDLE;
        C_WAKE:     state_q <= C_START;
        C_START:    state_q <= C_RUN;
        C_RUN:      if (blk_done[blk_q]) begin state_q <= C_IDLE; blk_q <= B_NONE; end
        default:    state_q <= C_IDLE;
      endcase
    end
  end

  // an instruction may only arrive while the controller is idle
  a_cmd_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                     cmd_valid |-> ready);
endmodule
