// cass_unary_decoder -- parallel unary decoding of one exponent window.
//
// The window `win` holds the next EXPW bits of a unary exponent stream, starting on a
// codeword boundary (bit 0 first); bits at and above `nbits` are ignored. A codeword of rank
// r is r zeros followed by a one, so every one ends a codeword. The window is cut into 8-bit
// chunks, each handled by a parallel zero counter (cass_zero_counter) at the same time. The
// reorganisation step then carries zero runs across chunk borders: the first codeword of a
// chunk gets the zeros left open at the end of the preceding chunks added (Algorithm 1 of
// the paper, "crossbar & accumulator"). A zero eliminator finally packs the codewords in
// stream order into `rank[0..ncodes-1]`, with `endpos` the bit index of each codeword's one,
// so a caller that takes n codewords pops endpos[n-1]+1 bits. A run of zeros not closed
// inside the window is left for the next window. Purely combinational.
// Chunking, counting and the reorganisation follow the paper; the window width and the
// compacted output list are this design's choices.
module cass_unary_decoder #(
  parameter int unsigned EXPW = cass_pkg::EXPW_DEF,   // window bits, multiple of 8
  parameter int unsigned RW   = $clog2(EXPW)          // rank / position width
) (
  input  logic [EXPW-1:0]           win,
  input  logic [$clog2(EXPW+1)-1:0] nbits,     // valid bits in win
  output logic [$clog2(EXPW+1)-1:0] ncodes,    // complete codewords in the window
  output logic [EXPW-1:0][RW-1:0]   rank,      // rank of codeword k
  output logic [EXPW-1:0][RW-1:0]   endpos     // bit index of codeword k's terminating one
);
  localparam int unsigned CH  = cass_pkg::CHUNK;
  localparam int unsigned NCH = EXPW / CH;
  localparam int unsigned CW  = $clog2(EXPW + 1) + 1;

  logic [EXPW-1:0]                 vbits;
  logic [NCH-1:0][CH-1:0][CW-1:0]  lcnt;
  logic [NCH-1:0][$clog2(CH+1)-1:0] nones;
  logic [NCH-1:0]                  lastb;
  logic [NCH-1:0][CW-1:0]          ltail;
  logic [NCH-1:0][CW-1:0]          carry;   // zeros open before each chunk

  always_comb begin
    for (int p = 0; p < EXPW; p++) vbits[p] = win[p] && (p < int'(nbits));
  end

  for (genvar c = 0; c < NCH; c++) begin : g_zc
    cass_zero_counter #(.W(CH), .CW(CW)) u_zc (
      .bits     (vbits[c*CH +: CH]),
      .cin      ('0),
      .cnt      (lcnt[c]),
      .num_ones (nones[c]),
      .last_bit (lastb[c]),
      .tail     (ltail[c])
    );
  end

  // Reorganisation and zero elimination
  always_comb begin
    logic [CW-1:0] len;
    logic          first;
    int unsigned   k;
    logic [CW-1:0] z;
    z = '0;
    for (int c = 0; c < NCH; c++) begin
      carry[c] = z;
      z = (nones[c] != 0) ? ltail[c] : z + ltail[c];
    end
    k      = 0;
    len    = '0;
    first  = 1'b0;
    rank   = '0;
    endpos = '0;
    for (int c = 0; c < NCH; c++) begin
      first = 1'b1;
      for (int j = 0; j < CH; j++) begin
        if (vbits[c*CH + j]) begin
          len = lcnt[c][j] + (first ? carry[c] : CW'(0));
          first = 1'b0;
          rank[k]   = RW'(len - CW'(1));
          endpos[k] = RW'(c*CH + j);
          k++;
        end
      end
    end
    ncodes = ($clog2(EXPW+1))'(k);
  end
endmodule
