// cass_ref_pkg -- behavioural reference of the Cassandra tile format, for testbenches only.
//
// Written independently of the RTL from the format description in cass_pkg: it encodes a
// tile of 32 BF16 values into the five per-type bit streams (bitmap, exponent, sign+mantissa
// high, mantissa low, pruned values), cuts the streams into 1024-bit blocks, and computes
// what a draft or a target read must return. Top-k selection keeps the k largest magnitudes,
// ties going to the lower index.
package cass_ref_pkg;
  localparam int T     = 32;
  localparam int TRUNC = 4;
  localparam int BLK   = 1024;
  localparam int NSYM  = 32;

  bit         strm[5][$];        // per-type bit streams, bit 0 first
  logic [7:0] cbook[NSYM];       // rank -> exponent

  function automatic void reset_streams();
    for (int t = 0; t < 5; t++) strm[t].delete();
  endfunction

  function automatic void put(int t, logic [31:0] v, int n);
    for (int b = 0; b < n; b++) strm[t].push_back(v[b]);
  endfunction

  // Default codebook: exponents 127, 126, 128, 125, 129, ... by rank
  function automatic void default_cbook();
    for (int r = 0; r < NSYM; r++)
      cbook[r] = (r % 2 == 0) ? 8'(127 + r/2) : 8'(127 - (r+1)/2);
  endfunction

  function automatic int rank_of(logic [7:0] e);
    for (int r = 0; r < NSYM; r++) if (cbook[r] == e) return r;
    return -1;
  endfunction

  // Random BF16 value whose exponent is in the codebook, low ranks more likely
  function automatic logic [15:0] rand_val();
    int r;
    r = $urandom_range(0, 3);
    r = r + ($urandom_range(0, 1) ? $urandom_range(0, 3) : 0) + ($urandom_range(0,7) == 0 ? $urandom_range(0, NSYM-9) : 0);
    if (r >= NSYM) r = NSYM-1;
    return {1'($urandom), cbook[r], 7'($urandom)};
  endfunction

  function automatic logic [T-1:0] topk(logic [15:0] v[T], int k);
    logic [T-1:0] keep;
    keep = '0;
    for (int i = 0; i < T; i++) begin
      int better;
      better = 0;
      for (int j = 0; j < T; j++)
        if (v[j][14:0] > v[i][14:0] || (v[j][14:0] == v[i][14:0] && j < i)) better++;
      keep[i] = (better < k);
    end
    return keep;
  endfunction

  function automatic logic [7:0] mx_mag(logic [15:0] x, logic [7:0] sh);
    logic [7:0] m;
    int d;
    m = {x[14:7] != 0, x[6:0]};
    d = int'(sh) - int'(x[14:7]);
    return (d >= 8) ? 8'd0 : m >> d;
  endfunction

  function automatic logic [7:0] shared_exp(logic [15:0] v[T], logic [T-1:0] keep);
    logic [7:0] sh;
    sh = 0;
    for (int i = 0; i < T; i++) if (keep[i] && v[i][14:7] > sh) sh = v[i][14:7];
    return sh;
  endfunction

  // Append one tile to the streams. c2 = 1 selects Cassandra-2 (MX).
  function automatic logic [T-1:0] encode_tile(logic [15:0] v[T], int k, bit c2);
    logic [T-1:0] keep;
    logic [7:0]   sh;
    keep = topk(v, k);
    put(0, keep, T);
    sh = shared_exp(v, keep);
    if (c2) put(1, sh, 8);
    for (int i = 0; i < T; i++) begin
      if (keep[i]) begin
        if (c2) begin
          logic [7:0] m;
          m = mx_mag(v[i], sh);
          put(2, {v[i][15], m[7:TRUNC]}, 1 + 8 - TRUNC);
          put(3, m[TRUNC-1:0], TRUNC);
        end else begin
          int r;
          r = rank_of(v[i][14:7]);
          for (int z = 0; z < r; z++) strm[1].push_back(1'b0);
          strm[1].push_back(1'b1);
          put(2, {v[i][15], v[i][6:TRUNC]}, 1 + 7 - TRUNC);
          put(3, v[i][TRUNC-1:0], TRUNC);
        end
      end else begin
        put(4, v[i], 16);
      end
    end
    return keep;
  endfunction

  // Expected decoder output for a tile
  // keep is the bitmap encode_tile returned for the tile
  function automatic logic [15:0] expect_val(logic [15:0] v[T], logic [T-1:0] keep, bit c2, bit full, int i);
    logic [7:0]   sh, m;
    int lz;
    if (!keep[i]) return full ? v[i] : 16'h0;
    if (!c2) return full ? v[i] : {v[i][15:TRUNC], {TRUNC{1'b0}}};
    sh = shared_exp(v, keep);
    m  = mx_mag(v[i], sh);
    if (!full) m[TRUNC-1:0] = 0;
    if (m == 0) return {v[i][15], 15'd0};
    lz = 0;
    while (!m[7-lz]) lz++;
    if (lz >= int'(sh)) return {v[i][15], 15'd0};
    m = m << lz;
    return {v[i][15], 8'(int'(sh) - lz), m[6:0]};
  endfunction

  function automatic int nblocks(int t);
    return (strm[t].size() + BLK - 1) / BLK;
  endfunction

  function automatic logic [BLK-1:0] block(int t, int n);
    logic [BLK-1:0] b;
    b = '0;
    for (int j = 0; j < BLK; j++)
      if (n*BLK + j < strm[t].size()) b[j] = strm[t][n*BLK + j];
    return b;
  endfunction
endpackage
