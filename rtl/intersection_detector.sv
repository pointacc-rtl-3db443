// Intersection detector (DI) of the mapping unit, used by kernel mapping.
//
// Input: one window of W merged comparator structs in ascending order, plus
// the last element of the previous window so that an equal pair split over
// two windows is not lost. Two neighbours with equal keys are one input-cloud
// point and one output-cloud point with the same (shifted) coordinates: a
// map (p = input index, q = output index, w = weight index). A flag marks
// the first element of each pair; every other position is a "zero". The
// number of zeros before each flagged position (zeros_cnt) is its distance
// to the front, and log2(W) shift stages, stage b shifting by 2^b where bit b
// of zeros_cnt is set, compact the maps to the front, as the paper draws it.
// Keeping one map per pair instead of both elements is this design's choice.
// Combinational; maps[0..count-1] are valid.
module intersection_detector
  import pointacc_pkg::*;
#(
  parameter int W = 32
) (
  input  cmp_t              prev_last,
  input  cmp_t              win [W],
  input  logic [WIDX_W-1:0] widx,
  output map_t              maps [W],
  output logic [$clog2(W+1)-1:0] count
);
  localparam int LW = $clog2(W);
  localparam int CW = $clog2(W + 1);

  always_comb begin
    cmp_t e [W+1];
    logic flag [W];
    map_t m [W];
    logic [CW-1:0] zc [W];
    logic [CW-1:0] zeros;
    e[0] = prev_last;
    for (int i = 0; i < W; i++) e[i+1] = win[i];
    zeros = '0;
    count = '0;
    for (int i = 0; i < W; i++) begin
      flag[i] = e[i].valid && e[i+1].valid && e[i].key == e[i+1].key &&
                e[i].src != e[i+1].src;
      m[i].p  = e[i].src ? e[i].idx : e[i+1].idx;
      m[i].q  = e[i].src ? e[i+1].idx : e[i].idx;
      m[i].w  = widx;
      zc[i]   = zeros;
      if (flag[i]) count = count + 1'b1;
      else         zeros = zeros + 1'b1;
    end
    // log2(W) compaction stages
    for (int b = 0; b < LW; b++) begin
      for (int i = 0; i < W; i++) begin
        if (flag[i] && zc[i][b]) begin
          m[i - (1 << b)]    = m[i];
          flag[i - (1 << b)] = 1'b1;
          zc[i - (1 << b)]   = zc[i];
          flag[i]            = 1'b0;
        end
      end
    end
    maps = m;
  end
endmodule
