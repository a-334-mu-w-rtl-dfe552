// polymul_cache: the multiplier's private memories, 2.1875 KB in all.
// The evaluation cache has 96 rows of 112 bits: rows 0..63 hold the
// evaluated public polynomial, seven 16-bit point values per row (one per
// MAC unit); rows 64..95 hold the evaluated secret, whose values fit in
// 8 bits, two indices per row (7 x 8 bits each). It has two synchronous
// ports, a (read/write) and b (read only). The result cache has 64 rows of
// 112 bits holding the seven accumulated point products per index, with one
// read port and one write port. A valid bit per result row, cleared by clear,
// makes a row read back as zero until it is first written, so a new
// row-column product starts from zero without a clearing pass. Read data
// appears one cycle after the request. The two sizes are the paper's; the
// row layout and the valid bits are this design's.
module polymul_cache (
  input  logic          clk,
  input  logic          rst_n,
  // evaluation cache
  input  logic          ea_en,
  input  logic          ea_we,
  input  logic [6:0]    ea_addr,
  input  logic [111:0]  ea_wdata,
  output logic [111:0]  ea_rdata,
  input  logic          eb_en,
  input  logic [6:0]    eb_addr,
  output logic [111:0]  eb_rdata,
  // result cache
  input  logic          clear,
  input  logic          rr_en,
  input  logic [5:0]    rr_addr,
  output logic [111:0]  rr_rdata,
  input  logic          rw_en,
  input  logic [5:0]    rw_addr,
  input  logic [111:0]  rw_wdata
);
  logic [111:0] ecache [96];
  logic [111:0] rcache [64];
  logic [63:0]  rvalid_q;
  logic [111:0] rr_q;
  logic         rr_ok_q;

  always_ff @(posedge clk) begin
    if (ea_en && ea_we) ecache[ea_addr] <= ea_wdata;
    if (ea_en && !ea_we) ea_rdata <= ecache[ea_addr];
    if (eb_en) eb_rdata <= ecache[eb_addr];
    if (rw_en) rcache[rw_addr] <= rw_wdata;
    if (rr_en) rr_q <= rcache[rr_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid_q <= '0;
      rr_ok_q  <= 1'b0;
    end else begin
      if (rr_en) rr_ok_q <= rvalid_q[rr_addr];
      if (clear) rvalid_q <= '0;
      else if (rw_en) rvalid_q[rw_addr] <= 1'b1;
    end
  end

  assign rr_rdata = rr_ok_q ? rr_q : '0;
endmodule
