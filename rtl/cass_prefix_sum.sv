// cass_prefix_sum -- parallel prefix sum over the sparsity bitmap.
//
// For every position i of a TILE-bit bitmap gives the number of kept values (ones) before i,
// which is the index of value i in the packed kept list; i minus that count is its index in
// the packed pruned list. `total` is the number of ones. Written as a running sum that a
// synthesis tool maps to a prefix network. Purely combinational.
// The paper names the parallel prefix sum and its place between the bitmap and the value
// concatenator; the rest is this design's.
module cass_prefix_sum #(
  parameter int unsigned N  = cass_pkg::TILE_DEF,
  parameter int unsigned CW = $clog2(N+1)
) (
  input  logic [N-1:0]          bitmap,
  output logic [N-1:0][CW-1:0]  excl,    // ones strictly before position i
  output logic [CW-1:0]         total
);
  always_comb begin
    logic [CW-1:0] acc;
    acc = '0;
    for (int i = 0; i < N; i++) begin
      excl[i] = acc;
      acc     = acc + CW'(bitmap[i]);
    end
    total = acc;
  end
endmodule
