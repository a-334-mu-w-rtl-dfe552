// verify: constant-time comparison of two memory regions of NWORDS words
// (default 136 words = 1088 bytes, the Saber ciphertext). Every cycle it
// reads one word of each region, off1 + k on port A and off2 + k on port
// B, XORs them and ORs the result into an accumulator, so the run time
// depends only on the length. After the last word, fail is updated (1 if
// any bit differed) and held until the next comparison, and done pulses.
// The XOR-and-accumulate scheme is the paper's; the fixed length is an
// assumption, since the instruction carries no length field.
module verify
  import saber_pkg::*;
#(
  parameter int unsigned NWORDS = 136
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] off1,
  input  logic [ADDR_W-1:0] off2,
  output logic              busy,
  output logic              done,
  output logic              fail,
  output mem_req_t          mem_a,
  input  logic [WORD_W-1:0] rdata_a,
  output mem_req_t          mem_b,
  input  logic [WORD_W-1:0] rdata_b
);
  logic [ADDR_W-1:0] a1_q, a2_q;
  logic [8:0]        k_q;
  logic              rd_q, issue;
  logic [WORD_W-1:0] acc_q;

  assign issue = busy && (k_q < 9'(NWORDS));
  always_comb begin
    mem_a = MEM_IDLE; mem_b = MEM_IDLE;
    mem_a.en = issue; mem_a.addr = a1_q + ADDR_W'(k_q);
    mem_b.en = issue; mem_b.addr = a2_q + ADDR_W'(k_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; fail <= 1'b0; a1_q <= '0; a2_q <= '0;
      k_q <= '0; rd_q <= 1'b0; acc_q <= '0;
    end else begin
      done <= 1'b0;
      rd_q <= issue;
      if (start && !busy) begin
        busy <= 1'b1; a1_q <= off1; a2_q <= off2; k_q <= '0; acc_q <= '0;
      end else if (busy) begin
        if (issue) k_q <= k_q + 1'b1;
        if (rd_q) acc_q <= acc_q | (rdata_a ^ rdata_b);
        if (!issue && !rd_q) begin
          busy <= 1'b0; done <= 1'b1; fail <= |acc_q;
        end
      end
    end
  end
endmodule
