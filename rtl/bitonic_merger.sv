// N merger of the mapping unit's MergeSort stage (MS).
//
// Merges two ascending arrays of W comparator structs into one ascending
// array of 2W (N = 2W in the paper's notation). The second array is reversed
// so that the concatenation is bitonic, then log2(2W) half-cleaner stages
// finish the merge. Combinational.
module bitonic_merger
  import pointacc_pkg::*;
#(
  parameter int W = 32
) (
  input  cmp_t a   [W],
  input  cmp_t b   [W],
  output cmp_t out [2*W]
);
  localparam int N = 2 * W;

  always_comb begin
    cmp_t s [N];
    cmp_t t;
    t = a[0];
    for (int i = 0; i < W; i++) begin
      s[i]     = a[i];
      s[N-1-i] = b[i];
    end
    for (int j = W; j > 0; j = j / 2) begin
      for (int i = 0; i < N; i++) begin
        if ((i & j) == 0) begin
          if (s[i].key > s[i+j].key) begin
            t = s[i]; s[i] = s[i+j]; s[i+j] = t;
          end
        end
      end
    end
    out = s;
  end
endmodule
