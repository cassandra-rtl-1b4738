// cass_value_concat -- bitmap-based de-sparsification and value concatenation.
//
// Rebuilds a dense tile of N BF16 values from the bitmap and two packed lists: `kept[k]` is
// the k-th kept value (rebuilt by the dynamic shifters) and `pruned[p]` the p-th pruned value
// read from the verification data. Position i takes kept[excl[i]] when its bitmap bit is set;
// otherwise it takes pruned[i - excl[i]] for a target read (`full` = 1) or zero for a draft
// read, which is the paper's value zero padding. excl comes from the parallel prefix sum.
// Purely combinational.
module cass_value_concat
  import cass_pkg::*;
#(
  parameter int unsigned N = TILE_DEF
) (
  input  logic [N-1:0]         bitmap,
  input  logic                 full,
  input  bf16_t [N-1:0]        kept,
  input  bf16_t [N-1:0]        pruned,
  output bf16_t [N-1:0]        dense
);
  localparam int unsigned CW = $clog2(N+1);
  logic [N-1:0][CW-1:0] excl;
  logic [CW-1:0]        total;

  cass_prefix_sum #(.N(N), .CW(CW)) u_ps (.bitmap(bitmap), .excl(excl), .total(total));

  always_comb begin
    for (int i = 0; i < N; i++) begin
      if (bitmap[i])  dense[i] = kept[excl[i][$clog2(N)-1:0]];
      else if (full)  dense[i] = pruned[($clog2(N))'(i - int'(excl[i]))];
      else            dense[i] = '0;
    end
  end
endmodule
