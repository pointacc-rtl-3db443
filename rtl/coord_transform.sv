// Coordinate transform of the mapping unit ("+offset" in front of the merger).
//
// Kernel mapping looks for input points p with p = q + delta for an output
// point q. The input cloud is shifted by -delta (the caller passes the
// already negated offset) so that the matching pairs have equal coordinates,
// and every point is turned into a comparator struct keyed by its packed
// coordinates (pointacc_pkg::coord_key). Invalid lanes become sentinels.
// A uniform shift keeps a lexicographically sorted window sorted.
// Combinational, W lanes.
module coord_transform
  import pointacc_pkg::*;
#(
  parameter int W = 32
) (
  input  point_t        pts   [W],
  input  coord_t        off_x,
  input  coord_t        off_y,
  input  coord_t        off_z,
  input  logic          src,      // source flag written into the payload
  output cmp_t          cmp_o [W]
);
  always_comb begin
    for (int i = 0; i < W; i++) begin
      if (pts[i].valid) begin
        cmp_o[i].key   = coord_key(coord_t'(pts[i].x + off_x),
                                   coord_t'(pts[i].y + off_y),
                                   coord_t'(pts[i].z + off_z));
        cmp_o[i].valid = 1'b1;
        cmp_o[i].src   = src;
        cmp_o[i].idx   = pts[i].idx;
      end else begin
        cmp_o[i] = cmp_sentinel();
      end
    end
  end
endmodule
