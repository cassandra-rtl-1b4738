// cass_bitonic_sorter -- bitonic sorting network for top-k selection in the encoder.
//
// Sorts N keys into descending order with the classic bitonic network of log2(N) merge
// phases (N/2 compare-exchange units per step, log2(N)*(log2(N)+1)/2 steps). The encoder
// forms each key as {magnitude, inverted lane index}, so all keys differ, ties go to the
// lower lane, and the low bits of a sorted key name the lane it came from; the first k
// sorted keys are the top-k values. N must be a power of two. Purely combinational; the
// encoder registers around it.
// The paper names a bitonic sorter as the encoder's top-k unit; the key layout is this
// design's.
module cass_bitonic_sorter #(
  parameter int unsigned N  = cass_pkg::TILE_DEF,
  parameter int unsigned KW = 20
) (
  input  logic [N-1:0][KW-1:0] keys,
  output logic [N-1:0][KW-1:0] sorted     // sorted[0] is the largest
);
  always_comb begin
    logic [N-1:0][KW-1:0] a;
    logic [KW-1:0]        t;
    int                   l;
    t = '0;
    l = 0;
    a = keys;
    for (int k = 2; k <= N; k = k * 2) begin
      for (int j = k / 2; j > 0; j = j / 2) begin
        for (int i = 0; i < N; i++) begin
          l = i ^ j;
          if (l > i) begin
            // descending in blocks where bit k of i is 0, ascending elsewhere
            if (((i & k) == 0) ? (a[i] < a[l]) : (a[i] > a[l])) begin
              t = a[i]; a[i] = a[l]; a[l] = t;
            end
          end
        end
      end
    end
    sorted = a;
  end
endmodule
