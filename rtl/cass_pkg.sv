// cass_pkg -- shared types and default sizes of the Cassandra encoder/decoder.
//
// Data format. Values are BFloat16 (1 sign, 8 exponent, 7 mantissa bits). A tile of
// TILE dense values is stored as five independent bit streams, one per data type, each
// packed least-significant bit first:
//   ST_BMP  speculation   TILE-bit bitmap, bit i = 1 when value i is kept (not pruned)
//   ST_EXP  speculation   Cassandra-1: unary codes of the kept exponents (rank r = r zeros
//                         followed by a one); Cassandra-2: one 8-bit shared exponent
//   ST_SPM  speculation   per kept value {sign, mantissa high bits}
//   ST_VLO  verification  per kept value the TRUNC truncated low mantissa bits
//   ST_PRN  verification  per pruned value the full 16-bit BF16 word
// A draft (speculative) read needs the first three streams only; a target read uses all five.
// In Cassandra-2 the kept values carry an MXINT-style 8-bit magnitude (hidden one plus 7
// mantissa bits) right-shifted by the distance to the tile's largest exponent.
// The five-stream layout, the tile size and the bit orders are this design's choices; the
// split into speculation and verification data, 4-bit truncation, 8-bit chunks and 128-byte
// blocks follow the paper.
package cass_pkg;

  localparam int unsigned BF_W      = 16;   // BFloat16 word
  localparam int unsigned EXP_W     = 8;    // exponent field
  localparam int unsigned MAN_W     = 7;    // mantissa field
  localparam int unsigned MX_W      = 8;    // Cassandra-2 element magnitude (hidden one + mantissa)

  localparam int unsigned TILE_DEF  = 32;   // values per tile (one MX block)
  localparam int unsigned TRUNC_DEF = 4;    // truncated mantissa bits (paper default)
  localparam int unsigned CHUNK     = 8;    // zero-counter chunk width (paper)
  localparam int unsigned EXPW_DEF  = 32;   // unary bits examined per decoder cycle
  localparam int unsigned NSYM_DEF  = 32;   // unary codebook entries
  localparam int unsigned BLK_DEF   = 1024; // memory block, 128 bytes (paper)
  localparam int unsigned NSTREAM   = 5;

  typedef enum logic [2:0] {
    ST_BMP = 3'd0,
    ST_EXP = 3'd1,
    ST_SPM = 3'd2,
    ST_VLO = 3'd3,
    ST_PRN = 3'd4
  } stream_e;

  // Exponent compression scheme
  typedef enum logic {
    MODE_C1 = 1'b0,   // Cassandra-1: unary coded exponents, lossless
    MODE_C2 = 1'b1    // Cassandra-2: MX shared exponent, lossy
  } cmode_e;

  typedef logic [BF_W-1:0] bf16_t;

  function automatic logic        bf_sign(input bf16_t v); return v[15];    endfunction
  function automatic logic [7:0]  bf_exp (input bf16_t v); return v[14:7];  endfunction
  function automatic logic [6:0]  bf_man (input bf16_t v); return v[6:0];   endfunction

  // Bits of one {sign, mantissa-high} speculation element
  function automatic int unsigned spm_w(input cmode_e m, input int unsigned trunc);
    return (m == MODE_C2) ? 1 + MX_W - trunc : 1 + MAN_W - trunc;
  endfunction

endpackage
