// cass_exp_lut -- unary codebook of the decoder (rank -> 8-bit exponent).
//
// Holds NSYM exponents; entry r is the exponent whose unary codeword has rank r (r zeros and a
// one), so entry 0 is the most frequent exponent. The table is written one entry per cycle
// through the configuration port (offline for weights, once per model for the KV cache) and
// read combinationally by NRD lanes at once. Out-of-range ranks read as exponent 0 and raise
// `miss` for that lane. Reset clears the table.
// The paper gives the LUT's role and the ordering by frequency; the port layout, the number of
// entries (the paper notes up to 32 distinct exponents) and the miss flag are this design's.
module cass_exp_lut #(
  parameter int unsigned NSYM = cass_pkg::NSYM_DEF,
  parameter int unsigned NRD  = cass_pkg::TILE_DEF,
  parameter int unsigned RW   = 5
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [$clog2(NSYM)-1:0]   wr_idx,
  input  logic [7:0]                wr_exp,
  input  logic [NRD-1:0][RW-1:0]    rd_rank,
  output logic [NRD-1:0][7:0]       rd_exp,
  output logic [NRD-1:0]            miss
);
  logic [NSYM-1:0][7:0] tbl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     tbl <= '0;
    else if (wr_en) tbl[wr_idx] <= wr_exp;
  end

  always_comb begin
    for (int i = 0; i < NRD; i++) begin
      if (int'(rd_rank[i]) < NSYM) begin
        rd_exp[i] = tbl[rd_rank[i]];
        miss[i]   = 1'b0;
      end else begin
        rd_exp[i] = '0;
        miss[i]   = 1'b1;
      end
    end
  end
endmodule
