// coef_stream: shared engine of the coefficient-wise blocks (AddRound,
// AddPack, Unpack, the binomial sampler and BS2PolVecP). It streams one
// polynomial of 256 coefficients, four at a time: operand A is unpacked
// from base_a over memory port A, an optional operand B from base_b over
// port B, the owning block computes the four result coefficients
// combinationally from grp_a/grp_b (grp_idx is the group number 0..63),
// and the results are packed and written to base_o over port B. Writes take
// priority on port B; the B decoder waits for them. One group is processed
// per cycle once the decoders are primed, so a polynomial takes about 70
// cycles. start is a pulse while busy is low; done pulses after the last
// word is written. Processing four coefficients at a time matches the
// paper; the shared engine is this design's way of building the blocks.
module coef_stream
  import saber_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cfmt_e             fmt_a,
  input  logic [ADDR_W-1:0] base_a,
  input  logic              use_b,
  input  cfmt_e             fmt_b,
  input  logic [ADDR_W-1:0] base_b,
  input  cfmt_e             fmt_o,
  input  logic [ADDR_W-1:0] base_o,
  output mem_req_t          mem_a,
  input  logic [WORD_W-1:0] rdata_a,
  output mem_req_t          mem_b,
  input  logic [WORD_W-1:0] rdata_b,
  output logic [3:0][15:0]  grp_a,
  output logic [3:0][15:0]  grp_b,
  output logic [5:0]        grp_idx,
  input  logic [3:0][15:0]  grp_o,
  output logic              busy,
  output logic              done
);
  logic       busy_q, use_b_q, fire, va, vb, rda, rdb, pk_v;
  logic [6:0] gcnt_q, wcnt_q, nout_q;
  logic [ADDR_W-1:0] adda, addb, wbase_q;
  logic [63:0] pk_word;

  assign fire = busy_q && (gcnt_q < 7'd64) && va && (!use_b_q || vb);
  assign grp_idx = gcnt_q[5:0];
  assign busy = busy_q;

  coeff_decoder u_dec_a (.clk, .rst_n, .start, .base(base_a),
    .nwords(7'(grp_bits(fmt_a))), .fmt(fmt_a), .rd_hold(1'b0),
    .rd_en(rda), .rd_addr(adda), .rd_data(rdata_a),
    .take(fire), .valid(va), .coef(grp_a));

  coeff_decoder u_dec_b (.clk, .rst_n, .start(start && use_b), .base(base_b),
    .nwords(7'(grp_bits(fmt_b))), .fmt(fmt_b), .rd_hold(pk_v),
    .rd_en(rdb), .rd_addr(addb), .rd_data(rdata_b),
    .take(fire && use_b_q), .valid(vb), .coef(grp_b));

  coeff_packer u_pack (.clk, .rst_n, .start, .fmt(fmt_o), .in_valid(fire),
    .coef(grp_o), .out_valid(pk_v), .out_word(pk_word));

  always_comb begin
    mem_a = MEM_IDLE;
    mem_a.en = rda;
    mem_a.addr = adda;
    mem_b = MEM_IDLE;
    if (pk_v) begin
      mem_b.en = 1'b1; mem_b.we = 1'b1;
      mem_b.addr = wbase_q + ADDR_W'(wcnt_q); mem_b.wdata = pk_word;
    end else begin
      mem_b.en = rdb; mem_b.addr = addb;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0; use_b_q <= 1'b0; gcnt_q <= '0; wcnt_q <= '0;
      nout_q <= '0; wbase_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy_q) begin
        busy_q <= 1'b1; use_b_q <= use_b; gcnt_q <= '0; wcnt_q <= '0;
        nout_q <= 7'(grp_bits(fmt_o)); wbase_q <= base_o;
      end else if (busy_q) begin
        if (fire) gcnt_q <= gcnt_q + 1'b1;
        if (pk_v) begin
          wcnt_q <= wcnt_q + 1'b1;
          if (wcnt_q + 1'b1 == nout_q) begin busy_q <= 1'b0; done <= 1'b1; end
        end
      end
    end
  end
endmodule
