// N/2 sorter of the mapping unit's Sort stage (ST).
//
// A bitonic sorting network over W comparator structs (W a power of two),
// ascending by key; ties keep no particular order. log2(W)*(log2(W)+1)/2
// compare-exchange stages, all combinational: the mapping unit registers
// the result. The network shape is the textbook bitonic sorter; the paper
// names the sorter but does not draw its network.
module bitonic_sorter
  import pointacc_pkg::*;
#(
  parameter int W = 32
) (
  input  cmp_t in  [W],
  output cmp_t out [W]
);
  localparam int LW = $clog2(W);

  always_comb begin
    cmp_t a [W];
    cmp_t t;
    int   l;
    logic up;
    a  = in;
    t  = in[0];
    l  = 0;
    up = 1'b0;
    for (int k = 2; k <= W; k = k * 2) begin
      for (int j = k / 2; j > 0; j = j / 2) begin
        for (int i = 0; i < W; i++) begin
          l = i ^ j;
          if (l > i) begin
            up = ((i & k) == 0);
            if ((a[i].key > a[l].key) == up && a[i].key != a[l].key) begin
              t = a[i]; a[i] = a[l]; a[l] = t;
            end
          end
        end
      end
    end
    out = a;
  end

  if (W != (1 << LW)) begin : g_bad_w
    $error("bitonic_sorter: W must be a power of two");
  end
endmodule
