// cass_exp_sel -- exponent compression and mantissa truncation of the encoder.
//
// Works on the packed list of the k kept values of a tile.
// Cassandra-1 (mode C1): the encoder's unary code table holds, per rank, the exponent that
// rank stands for (most frequent exponent at rank 0). Each kept exponent is searched in the
// table (a small CAM); its rank r gives the codeword r zeros and a one, of length r+1
// (`clen`). An exponent missing from the table raises `miss`, as the format would be lossy.
// Cassandra-2 (mode C2): the shared exponent is the largest kept exponent; every kept value
// becomes an 8-bit magnitude {hidden one, mantissa} shifted right by the distance to the
// shared exponent (the dynamic shifter), which drops bits (lossy, as MX is).
// Both modes then truncate: the top bits plus the sign form the speculation element
// `spm_el` = {sign, high bits}, the TRUNC low bits form the verification element `vlo_el`.
// Lanes at or above k give zeros. The table is written through a configuration port and
// cleared by reset. Purely combinational apart from the table.
// Unary codes by frequency, MX shared exponent and truncation follow the paper; the table
// search and the miss flag are this design's.
module cass_exp_sel
  import cass_pkg::*;
#(
  parameter int unsigned N     = TILE_DEF,
  parameter int unsigned NSYM  = NSYM_DEF,
  parameter int unsigned TRUNC = TRUNC_DEF,
  parameter int unsigned LW    = $clog2(NSYM+1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cb_wr_en,
  input  logic [$clog2(NSYM)-1:0]       cb_wr_idx,
  input  logic [7:0]                    cb_wr_exp,
  input  cmode_e                        mode,
  input  bf16_t [N-1:0]                 kept,
  input  logic [$clog2(N+1)-1:0]        k,
  output logic [N-1:0][LW-1:0]          clen,     // unary codeword length (C1)
  output logic [7:0]                    shexp,    // shared exponent (C2)
  output logic [N-1:0][MX_W-TRUNC:0]    spm_el,   // {sign, mantissa high}
  output logic [N-1:0][TRUNC-1:0]       vlo_el,
  output logic                          miss
);
  logic [NSYM-1:0][7:0] tbl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        tbl <= '0;
    else if (cb_wr_en) tbl[cb_wr_idx] <= cb_wr_exp;
  end

  always_comb begin
    shexp = '0;
    for (int i = 0; i < N; i++)
      if (i < int'(k) && bf_exp(kept[i]) > shexp) shexp = bf_exp(kept[i]);
  end

  always_comb begin
    logic            hit;
    logic [MX_W-1:0] m;
    logic [7:0]      d;
    miss = 1'b0;
    for (int i = 0; i < N; i++) begin
      clen[i]   = '0;
      spm_el[i] = '0;
      vlo_el[i] = '0;
      hit       = 1'b0;
      m         = '0;
      d         = '0;
      if (i < int'(k)) begin
        if (mode == MODE_C1) begin
          for (int r = NSYM-1; r >= 0; r--)
            if (tbl[r] == bf_exp(kept[i])) begin
              hit     = 1'b1;
              clen[i] = LW'(r + 1);
            end
          if (!hit) miss = 1'b1;
          spm_el[i] = (MX_W-TRUNC+1)'({bf_sign(kept[i]), bf_man(kept[i])[MAN_W-1:TRUNC]});
          vlo_el[i] = bf_man(kept[i])[TRUNC-1:0];
        end else begin
          d = shexp - bf_exp(kept[i]);
          m = {bf_exp(kept[i]) != 0, bf_man(kept[i])};
          m = (d >= 8) ? '0 : m >> d;
          spm_el[i] = {bf_sign(kept[i]), m[MX_W-1:TRUNC]};
          vlo_el[i] = m[TRUNC-1:0];
        end
      end
    end
  end
endmodule
