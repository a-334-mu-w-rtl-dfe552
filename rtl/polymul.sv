// polymul: the vector multiplier ("VectorMul") of the Saber accelerator.
// One instruction computes one row-column product sum_p A_p * s_p over the
// module rank L = 3 in the ring Z_(2^13)[x]/(x^256 + 1), with striding
// Toom-Cook 4-way and lazy interpolation: each of the three pairs is
// evaluated into seven 64-coefficient negacyclic products, the products of
// all three pairs are accumulated in the result cache, and interpolation
// runs once at the end.
//
// Operands and result in system memory (64-bit words):
//   public polynomial p : off1 + p*stride, 13-bit packed (52 words) or, with
//                         pub16, 16-bit containers (64 words)
//   secret polynomial p : off2 + 16*p, 4-bit two's complement (16 words)
//   result              : off2 + 48, 64 words of four 16-bit coefficients
//                         (13-bit values)
// The instruction format gives only two offsets; the paper says the two
// inputs come from both offsets and the output starts from offset2, and
// placing the result right after the secret vector is this design's reading.
//
// The control FSM has the states of the paper's figure: WAIT, LOAD_COEF
// (public polynomial read, decoded, evaluated and written to the cache, 64
// cycles plus start-up), LOAD_SECRET (the same for the secret), EVAL (drains
// the evaluation register), MULT (the seven MAC units, exactly 1168 cycles)
// and, after the L-th pass, INTERP (about 70 cycles). start is a one-cycle
// pulse while busy is low; done pulses when the last result word is written.
// The two caches have their own clock gate, open from start until the FSM
// is back in WAIT, as the paper gates the multiplication memory while the
// FSM waits.
module polymul
  import saber_pkg::*;
#(
  parameter int unsigned L = SABER_L
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              pub16,      // public operand in 16-bit containers
  input  logic [ADDR_W-1:0] off1,
  input  logic [ADDR_W-1:0] off2,
  input  logic [ADDR_W-1:0] stride,     // words between public polynomials
  output logic              busy,
  output logic              done,
  output pm_state_e         fsm_state,
  output mem_req_t          mem_rd,
  input  logic [WORD_W-1:0] mem_rdata,
  output mem_req_t          mem_wr
);
  pm_state_e state_q;
  logic [1:0]        poly_q;
  logic [6:0]        grp_q;        // groups of 4 coefficients evaluated
  logic [3:0]        g_q;          // MAC group (4 secret values)
  logic [6:0]        c_q;          // cycle within a MAC group (0..72)
  logic [6:0]        ic_q;         // interpolation read counter
  logic              pub16_q;
  logic [ADDR_W-1:0] off2_q, stride_q, pbase_q;

  assign fsm_state = state_q;
  assign busy = (state_q != PM_WAIT);

  // ---------------- decoders ----------------
  logic pd_start, sd_start, pd_valid, sd_valid, pd_take, sd_take;
  logic pd_rd, sd_rd;
  logic [ADDR_W-1:0] pd_addr, sd_addr, pd_base, sd_base;
  logic [3:0][15:0] pd_coef, sd_coef;
  logic pd_w16;
  assign pd_w16 = (state_q == PM_WAIT) ? pub16 : pub16_q;

  coeff_decoder u_pub_dec (
    .clk, .rst_n, .start(pd_start), .base(pd_base),
    .nwords(pd_w16 ? 7'd64 : 7'd52), .fmt(pd_w16 ? F16 : F13), .rd_hold(1'b0),
    .rd_en(pd_rd), .rd_addr(pd_addr), .rd_data(mem_rdata),
    .take(pd_take), .valid(pd_valid), .coef(pd_coef));

  coeff_decoder u_sec_dec (
    .clk, .rst_n, .start(sd_start), .base(sd_base),
    .nwords(7'd16), .fmt(F4), .rd_hold(1'b0),
    .rd_en(sd_rd), .rd_addr(sd_addr), .rd_data(mem_rdata),
    .take(sd_take), .valid(sd_valid), .coef(sd_coef));

  always_comb begin
    mem_rd = MEM_IDLE;
    mem_rd.en   = pd_rd | sd_rd;
    mem_rd.addr = pd_rd ? pd_addr : sd_addr;
  end

  // ---------------- evaluation ----------------
  logic             ev_in_valid, ev_out_valid, ev_sec_q;
  logic [3:0][15:0] ev_r;
  logic [6:0][15:0] aws;
  logic [5:0]       ev_idx_q;
  logic [55:0]      sec_half_q;

  assign pd_take = (state_q == PM_LOAD_COEF);
  assign sd_take = (state_q == PM_LOAD_SECRET);
  assign ev_in_valid = (pd_take && pd_valid) || (sd_take && sd_valid);
  always_comb begin
    for (int k = 0; k < 4; k++)
      ev_r[k] = pd_take ? pd_coef[k] : {{12{sd_coef[k][3]}}, sd_coef[k][3:0]};
  end

  tc_eval u_eval (.clk, .rst_n, .in_valid(ev_in_valid), .r(ev_r),
                  .out_valid(ev_out_valid), .aws(aws));

  logic [55:0] aws8;
  always_comb for (int k = 0; k < 7; k++) aws8[k*8 +: 8] = aws[k][7:0];

  // ---------------- caches ----------------
  logic         ea_en, ea_we, eb_en, rr_en, rw_en, clear;
  logic [6:0]   ea_addr, eb_addr;
  logic [5:0]   rr_addr, rw_addr;
  logic [111:0] ea_wdata, ea_rdata, eb_rdata, rr_rdata, rw_wdata;

  // the caches run on their own gated clock, stopped while the FSM waits
  logic cache_en, cache_clk;
  assign cache_en = (state_q != PM_WAIT) || start;
  clock_gate u_cache_cg (.clk, .rst_n, .clk_en(cache_en), .gated_clk(cache_clk));

  polymul_cache u_cache (.clk(cache_clk), .rst_n,
    .ea_en, .ea_we, .ea_addr, .ea_wdata, .ea_rdata,
    .eb_en, .eb_addr, .eb_rdata,
    .clear, .rr_en, .rr_addr, .rr_rdata, .rw_en, .rw_addr, .rw_wdata);

  // ---------------- MAC array ----------------
  logic       in_mult, load_b, b_hi, fill, step, flush;
  logic [5:0] i_idx, j_idx;
  logic [3:0] neg;
  logic [6:0][15:0] w_out;

  assign in_mult = (state_q == PM_MULT);
  assign j_idx   = {g_q, 2'b00};
  assign i_idx   = 6'(c_q - 7'd6);
  assign load_b  = in_mult && (c_q == 7'd1 || c_q == 7'd2);
  assign b_hi    = (c_q == 7'd2);
  assign fill    = in_mult && (c_q >= 7'd3) && (c_q <= 7'd5);
  assign step    = in_mult && (c_q >= 7'd6) && (c_q <= 7'd69);
  assign flush   = in_mult && (c_q >= 7'd70);
  always_comb
    for (int t = 0; t < 4; t++)
      neg[t] = (7'(i_idx) + 7'(j_idx) + 7'(t)) >= 7'd64;

  for (genvar k = 0; k < 7; k++) begin : g_mac
    tc_mac_unit u_mac (
      .clk, .rst_n, .load_b, .b_hi,
      .b_pair({eb_rdata[56 + 8*k +: 8], eb_rdata[8*k +: 8]}),
      .fill, .step, .flush, .neg,
      .a_in(ea_rdata[16*k +: 16]), .w_in(rr_rdata[16*k +: 16]),
      .w_out(w_out[k]));
  end

  // ---------------- interpolation ----------------
  logic        ip_start, ip_in_valid, ip_out_valid;
  logic [5:0]  ip_idx;
  logic [63:0] ip_word;
  tc_interp u_interp (.clk, .rst_n, .start(ip_start), .in_valid(ip_in_valid),
    .w(rr_rdata), .out_valid(ip_out_valid), .out_idx(ip_idx), .out_word(ip_word));

  always_comb begin
    mem_wr = MEM_IDLE;
    mem_wr.en    = ip_out_valid;
    mem_wr.we    = 1'b1;
    mem_wr.addr  = off2_q + ADDR_W'(3 * W_POLY4) + ADDR_W'(ip_idx);
    mem_wr.wdata = ip_word;
  end

  // ---------------- cache port control ----------------
  always_comb begin
    ea_en = 1'b0; ea_we = 1'b0; ea_addr = '0; ea_wdata = '0;
    eb_en = 1'b0; eb_addr = '0;
    rr_en = 1'b0; rr_addr = '0; rw_en = 1'b0; rw_addr = '0; rw_wdata = w_out;
    if (ev_out_valid) begin
      if (!ev_sec_q) begin
        ea_en = 1'b1; ea_we = 1'b1; ea_addr = {1'b0, ev_idx_q}; ea_wdata = aws;
      end else if (ev_idx_q[0]) begin
        ea_en = 1'b1; ea_we = 1'b1; ea_addr = 7'd64 + 7'(ev_idx_q[5:1]);
        ea_wdata = {aws8, sec_half_q};
      end
    end
    if (in_mult) begin
      if (c_q <= 7'd1) begin
        eb_en = 1'b1; eb_addr = 7'd64 + {2'b00, g_q, 1'b0} + c_q;
      end
      if (c_q >= 7'd2 && c_q <= 7'd5) begin
        rr_en = 1'b1; rr_addr = j_idx + 6'(c_q - 7'd2);
      end
      if (c_q >= 7'd6 && c_q <= 7'd68) begin
        rr_en = 1'b1; rr_addr = i_idx + j_idx + 6'd4;
      end
      if (c_q >= 7'd5 && c_q <= 7'd68) begin
        ea_en = 1'b1; ea_addr = (c_q == 7'd5) ? 7'd0 : 7'(i_idx) + 7'd1;
      end
      if (step) begin
        rw_en = 1'b1; rw_addr = i_idx + j_idx;
      end
      if (flush) begin
        rw_en = 1'b1; rw_addr = j_idx + 6'(c_q - 7'd70);
      end
    end
    if (state_q == PM_INTERP && ic_q < 7'd64) begin
      rr_en = 1'b1; rr_addr = ic_q[5:0];
    end
  end

  // ---------------- FSM ----------------
  logic last_grp;
  assign last_grp = (grp_q == 7'd63) && ev_in_valid;
  assign pd_base  = (state_q == PM_WAIT) ? off1 : pbase_q + stride_q;
  assign sd_base  = off2_q + ADDR_W'(W_POLY4) * ADDR_W'(poly_q);
  assign pd_start = (state_q == PM_WAIT && start) ||
                    (in_mult && c_q == 7'd72 && g_q == 4'd15 && poly_q != 2'(L - 1));
  assign sd_start = (state_q == PM_LOAD_COEF) && last_grp;
  assign clear    = (state_q == PM_WAIT) && start;
  assign ip_start = (state_q == PM_WAIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= PM_WAIT; poly_q <= '0; grp_q <= '0; g_q <= '0; c_q <= '0;
      ic_q <= '0; pub16_q <= 1'b0; off2_q <= '0; stride_q <= '0;
      pbase_q <= '0; ev_sec_q <= 1'b0; ev_idx_q <= '0; sec_half_q <= '0;
      ip_in_valid <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      ip_in_valid <= rr_en && (state_q == PM_INTERP);
      if (ev_in_valid) begin
        ev_sec_q <= sd_take;
        ev_idx_q <= grp_q[5:0];
        grp_q    <= (grp_q == 7'd63) ? 7'd0 : grp_q + 1'b1;
      end
      if (ev_out_valid && ev_sec_q && !ev_idx_q[0]) sec_half_q <= aws8;
      unique case (state_q)
        PM_WAIT: if (start) begin
          state_q <= PM_LOAD_COEF;
          pub16_q <= pub16; off2_q <= off2; stride_q <= stride;
          pbase_q <= off1; poly_q <= '0; grp_q <= '0;
        end
        PM_LOAD_COEF:   if (last_grp) state_q <= PM_LOAD_SECRET;
        PM_LOAD_SECRET: if (last_grp) state_q <= PM_EVAL;
        PM_EVAL: begin
          state_q <= PM_MULT; g_q <= '0; c_q <= '0;
        end
        PM_MULT: begin
          if (c_q == 7'd72) begin
            c_q <= '0;
            g_q <= g_q + 1'b1;
            if (g_q == 4'd15) begin
              if (poly_q == 2'(L - 1)) begin
                state_q <= PM_INTERP; ic_q <= '0;
              end else begin
                state_q <= PM_LOAD_COEF;
                poly_q  <= poly_q + 1'b1;
                pbase_q <= pbase_q + stride_q;
              end
            end
          end else begin
            c_q <= c_q + 1'b1;
          end
        end
        PM_INTERP: begin
          if (ic_q < 7'd64) ic_q <= ic_q + 1'b1;
          if (ip_out_valid && ip_idx == 6'd0) begin
            state_q <= PM_WAIT; done <= 1'b1;
          end
        end
        default: state_q <= PM_WAIT;
      endcase
    end
  end
endmodule
