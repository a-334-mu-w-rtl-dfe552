// serial_if: the chip's serial interface with its serial-to-parallel
// converter. Bits arrive LSB first on s_in, one per clock while s_valid is
// high. With s_cmd high they fill a 24-bit command register and cmd_valid
// pulses with the micro-instruction after 24 bits; with s_cmd low they fill
// a 64-bit data register and word_valid pulses with the memory word after
// 64 bits. s_cmd must not change inside a frame. In the other direction a
// 64-bit word loaded with tx_load is shifted out LSB first on s_out during
// the next 64 cycles, flagged by s_out_valid. The paper gives only the
// function (serial in, 64-bit parallel out); framing, bit order and the
// shared clock are this design's choices.
module serial_if
  import saber_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_in,
  input  logic              s_valid,
  input  logic              s_cmd,
  output logic              s_out,
  output logic              s_out_valid,
  output logic              cmd_valid,
  output instr_t            cmd,
  output logic              word_valid,
  output logic [WORD_W-1:0] word,
  input  logic              tx_load,
  input  logic [WORD_W-1:0] tx_word
);
  logic [23:0]       csr_q;
  logic [WORD_W-1:0] dsr_q, tsr_q;
  logic [4:0]        ccnt_q;
  logic [6:0]        dcnt_q, tcnt_q;

  assign s_out = tsr_q[0];
  assign s_out_valid = (tcnt_q != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      csr_q <= '0; dsr_q <= '0; tsr_q <= '0; ccnt_q <= '0; dcnt_q <= '0; tcnt_q <= '0;
      cmd_valid <= 1'b0; cmd <= '0; word_valid <= 1'b0; word <= '0;
    end else begin
      cmd_valid <= 1'b0;
      word_valid <= 1'b0;
      if (s_valid && s_cmd) begin
        csr_q <= {s_in, csr_q[23:1]};
        if (ccnt_q == 5'd23) begin
          ccnt_q <= '0; cmd_valid <= 1'b1; cmd <= instr_t'({s_in, csr_q[23:1]});
        end else ccnt_q <= ccnt_q + 1'b1;
      end
      if (s_valid && !s_cmd) begin
        dsr_q <= {s_in, dsr_q[WORD_W-1:1]};
        if (dcnt_q == 7'd63) begin
          dcnt_q <= '0; word_valid <= 1'b1; word <= {s_in, dsr_q[WORD_W-1:1]};
        end else dcnt_q <= dcnt_q + 1'b1;
      end
      if (tx_load) begin
        tsr_q <= tx_word; tcnt_q <= 7'd64;
      end else if (tcnt_q != 0) begin
        tsr_q <= {1'b0, tsr_q[WORD_W-1:1]}; tcnt_q <= tcnt_q - 1'b1;
      end
    end
  end
endmodule
