// cass_addr_gen -- address generator of the encoder.
//
// Bit level: lays out one tile's fields in each of the five data-type streams. The unary
// codewords of the kept exponents are placed back to back; the offset of codeword i is the
// sum of the lengths of codewords 0..i-1 (a prefix sum), and since a codeword is zeros
// ended by a one, only that one is set. Fixed-width fields ({sign, mantissa high}, mantissa
// low, pruned words) sit at i times their width. `pay[t]` holds the bits of type t, bit 0
// first, and `plen[t]` their count; bits at and above plen are zero.
// Block level: keeps the memory address of the next block of each type, loaded from `base`
// at `start` and advanced when the merge buffer writes a block of that type (`emit`), so
// each type's blocks land contiguously from its base address.
// Per-type packing follows the paper's stream layout of bitmaps, variable exponents and
// mantissas; the exact field order and the per-type address counters are this design's.
module cass_addr_gen
  import cass_pkg::*;
#(
  parameter int unsigned N     = TILE_DEF,
  parameter int unsigned NSYM  = NSYM_DEF,
  parameter int unsigned TRUNC = TRUNC_DEF,
  parameter int unsigned BLK   = BLK_DEF,
  parameter int unsigned AW    = 17,
  parameter int unsigned LW    = $clog2(NSYM+1)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic [NSTREAM-1:0][AW-1:0]      base,
  input  logic                            emit,
  input  stream_e                         emit_type,
  output logic [NSTREAM-1:0][AW-1:0]      next_addr,
  input  cmode_e                          mode,
  input  logic [N-1:0]                    bitmap,
  input  logic [$clog2(N+1)-1:0]          k,
  input  logic [N-1:0][LW-1:0]            clen,
  input  logic [7:0]                      shexp,
  input  logic [N-1:0][MX_W-TRUNC:0]      spm_el,
  input  logic [N-1:0][TRUNC-1:0]         vlo_el,
  input  bf16_t [N-1:0]                   pruned,
  output logic [NSTREAM-1:0][BLK-1:0]     pay,
  output logic [NSTREAM-1:0][$clog2(BLK+1)-1:0] plen
);
  localparam int unsigned SPW1 = 1 + MAN_W - TRUNC;
  localparam int unsigned SPW2 = 1 + MX_W - TRUNC;
  localparam int unsigned PL   = $clog2(BLK+1);

  always_comb begin
    int unsigned off;
    pay = '0;
    // bitmap
    pay[ST_BMP][N-1:0] = bitmap;
    plen[ST_BMP]       = PL'(N);
    // exponents
    off = 0;
    if (mode == MODE_C1) begin
      for (int i = 0; i < N; i++)
        if (i < int'(k)) begin
          pay[ST_EXP][off + int'(clen[i]) - 1] = 1'b1;
          off = off + int'(clen[i]);
        end
      plen[ST_EXP] = PL'(off);
    end else begin
      pay[ST_EXP][7:0] = shexp;
      plen[ST_EXP]     = PL'(8);
    end
    // sign + mantissa high, mantissa low, pruned values
    for (int i = 0; i < N; i++) begin
      if (mode == MODE_C2) pay[ST_SPM][i*SPW2 +: SPW2] = spm_el[i];
      else                 pay[ST_SPM][i*SPW1 +: SPW1] = spm_el[i][SPW1-1:0];
      pay[ST_VLO][i*TRUNC +: TRUNC] = vlo_el[i];
      pay[ST_PRN][i*BF_W +: BF_W]   = pruned[i];
    end
    plen[ST_SPM] = PL'(int'(k) * ((mode == MODE_C2) ? SPW2 : SPW1));
    plen[ST_VLO] = PL'(int'(k) * TRUNC);
    plen[ST_PRN] = PL'((N - int'(k)) * BF_W);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      next_addr <= '0;
    else if (start)  next_addr <= base;
    else if (emit)   next_addr[emit_type] <= next_addr[emit_type] + 1'b1;
  end
endmodule
