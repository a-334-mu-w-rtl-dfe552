// saber_pkg: types and constants shared by the Saber accelerator blocks.
// The 24-bit micro-instruction layout (Op in bits 3..0, Offset1, Offset2 up
// to bit 23) and the printed opcodes follow the accelerator's instruction
// format; the opcodes for the vector multiplier and BS2PolVecP are not
// printed there and were chosen from the unused codes. Saber constants
// (q = 2^13, p = 2^10, T = 2^4, l = 3) are the Saber parameter set.
package saber_pkg;
  localparam int unsigned WORD_W = 64;   // system data bus / SRAM word
  localparam int unsigned ADDR_W = 10;   // 1K words of system memory
  localparam int unsigned EQ = 13;       // log2 q
  localparam int unsigned EP = 10;       // log2 p
  localparam int unsigned ET = 4;        // log2 T
  localparam int unsigned SABER_L = 3;   // module rank
  localparam int unsigned N = 256;       // polynomial degree
  localparam logic [15:0] H1 = 16'd4;    // 2^(EQ-EP-1)
  localparam logic [15:0] H2 = 16'd228;  // 2^(EP-2) - 2^(EP-ET-1) + 2^(EQ-EP-1)

  // one memory port request: synchronous SRAM, read data one cycle later
  typedef struct packed {
    logic              en;
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [WORD_W-1:0] wdata;
  } mem_req_t;

  localparam mem_req_t MEM_IDLE = '{en: 1'b0, we: 1'b0, addr: '0, wdata: '0};

  typedef enum logic [3:0] {
    OP_MEM_WR    = 4'b0000,
    OP_MEM_RD    = 4'b0001,
    OP_SHA       = 4'b0010,
    OP_SAMPLER   = 4'b0011,
    OP_ADDPACK   = 4'b0100,
    OP_ADDROUND  = 4'b0101,
    OP_UNPACK    = 4'b0110,
    OP_VMUL      = 4'b0111,  // assumed: row of A (13-bit packed, consecutive)
    OP_BS2POLVEC = 4'b1000,  // assumed
    OP_VERIFY    = 4'b1001,
    OP_COPY      = 4'b1010,
    OP_CMOV      = 4'b1011,
    OP_SHAKE_EXT = 4'b1100,
    OP_VMUL_T    = 4'b1101,  // assumed: column of A (transposed access)
    OP_VMUL_P    = 4'b1110,  // assumed: 16-bit public operand (b or b')
    OP_NOP       = 4'b1111
  } opcode_e;

  typedef struct packed {
    logic [ADDR_W-1:0] off2;   // bits 23..14
    logic [ADDR_W-1:0] off1;   // bits 13..4
    opcode_e           op;     // bits 3..0
  } instr_t;

  // packed coefficient formats in memory (bits per coefficient)
  typedef enum logic [2:0] {
    F1 = 3'd0, F4 = 3'd1, F8 = 3'd2, F10 = 3'd3, F13 = 3'd4, F16 = 3'd5
  } cfmt_e;

  function automatic logic [7:0] grp_bits(input cfmt_e f);  // 4 coefficients
    unique case (f)
      F1:      return 8'd4;
      F4:      return 8'd16;
      F8:      return 8'd32;
      F10:     return 8'd40;
      F13:     return 8'd52;
      default: return 8'd64;
    endcase
  endfunction

  // states of the vector-multiplier FSM
  typedef enum logic [2:0] {
    PM_WAIT, PM_LOAD_COEF, PM_LOAD_SECRET, PM_EVAL, PM_MULT, PM_INTERP
  } pm_state_e;

  // blocks that the command controller starts (index into enable vectors)
  typedef enum logic [3:0] {
    B_NONE, B_SHA, B_SAMPLER, B_ADDPACK, B_ADDROUND, B_UNPACK, B_VMUL,
    B_BS2P, B_VERIFY, B_CMOV
  } blk_e;
  localparam int unsigned NBLK = 10;

  // words per polynomial in each storage format
  localparam int unsigned W_POLY13 = 52;  // 256 x 13 bit
  localparam int unsigned W_POLY16 = 64;  // 256 x 16 bit
  localparam int unsigned W_POLY10 = 40;  // 256 x 10 bit
  localparam int unsigned W_POLY4  = 16;  // 256 x 4 bit
  localparam int unsigned W_MSG    = 4;   // 256 x 1 bit
endpackage
