// cass_format_splitter -- splits a tile into speculation and verification parts.
//
// From the sorted keys of the bitonic sorter it marks the first `k` lanes as kept (the
// top-k magnitudes), giving the bitmap. Kept values are packed in lane order into `kept`
// (they go on to exponent compression and mantissa truncation); the other values are
// packed in lane order into `pruned`, which is verification data stored unchanged. The
// packing positions come from a parallel prefix sum over the bitmap. Unused list entries
// are zero. Purely combinational.
// Top-k pruning per tile and the speculation/verification split follow the paper; lane
// order packing is this design's.
module cass_format_splitter
  import cass_pkg::*;
#(
  parameter int unsigned N  = TILE_DEF,
  parameter int unsigned KW = 20
) (
  input  bf16_t [N-1:0]           vals,
  input  logic  [N-1:0][KW-1:0]   sorted,
  input  logic  [$clog2(N+1)-1:0] k,
  output logic  [N-1:0]           bitmap,
  output bf16_t [N-1:0]           kept,
  output bf16_t [N-1:0]           pruned
);
  localparam int unsigned IW = $clog2(N);
  localparam int unsigned CW = $clog2(N+1);
  logic [N-1:0][CW-1:0] excl;
  logic [CW-1:0]        total;

  always_comb begin
    bitmap = '0;
    for (int r = 0; r < N; r++)
      if (r < int'(k)) bitmap[~sorted[r][IW-1:0]] = 1'b1;
  end

  cass_prefix_sum #(.N(N), .CW(CW)) u_ps (.bitmap(bitmap), .excl(excl), .total(total));

  always_comb begin
    kept   = '0;
    pruned = '0;
    for (int i = 0; i < N; i++) begin
      if (bitmap[i]) kept[excl[i][IW-1:0]] = vals[i];
      else           pruned[IW'(i - int'(excl[i]))] = vals[i];
    end
  end
endmodule
