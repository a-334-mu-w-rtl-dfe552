// cmov: constant-time conditional move of NWORDS words (default 4 words =
// 32 bytes, one key or seed) from off1 to off2, used at the end of
// decapsulation to replace the pre-key by z when the re-encrypted
// ciphertext differs. Each word is read from both regions and then written
// back to off2 as either the source word (flag or force set) or its old
// value, so the same reads and writes happen whatever the flag. force turns
// the block into the unconditional Copy instruction. Two cycles per word.
// Running regardless of the flag is the paper's; the length, the shared
// Copy instruction and the timing are this design's choices.
module cmov
  import saber_pkg::*;
#(
  parameter int unsigned NWORDS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              flag,
  input  logic              force_mv,
  input  logic [ADDR_W-1:0] off1,
  input  logic [ADDR_W-1:0] off2,
  output logic              busy,
  output logic              done,
  output mem_req_t          mem_a,
  input  logic [WORD_W-1:0] rdata_a,
  output mem_req_t          mem_b,
  input  logic [WORD_W-1:0] rdata_b
);
  logic [ADDR_W-1:0] a1_q, a2_q;
  logic [7:0]        k_q;
  logic              wr_q, mv_q;

  always_comb begin
    mem_a = MEM_IDLE; mem_b = MEM_IDLE;
    if (busy && !wr_q) begin
      mem_a.en = 1'b1; mem_a.addr = a1_q + ADDR_W'(k_q);
      mem_b.en = 1'b1; mem_b.addr = a2_q + ADDR_W'(k_q);
    end else if (busy) begin
      mem_b.en = 1'b1; mem_b.we = 1'b1; mem_b.addr = a2_q + ADDR_W'(k_q);
      mem_b.wdata = mv_q ? rdata_a : rdata_b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; a1_q <= '0; a2_q <= '0; k_q <= '0;
      wr_q <= 1'b0; mv_q <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; a1_q <= off1; a2_q <= off2; k_q <= '0; wr_q <= 1'b0;
        mv_q <= flag | force_mv;
      end else if (busy) begin
        wr_q <= !wr_q;
        if (wr_q) begin
          k_q <= k_q + 1'b1;
          if (k_q == 8'(NWORDS - 1)) begin busy <= 1'b0; done <= 1'b1; end
        end
      end
    end
  end
endmodule
