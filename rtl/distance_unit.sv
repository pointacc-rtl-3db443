// Distance calculation stage (CD) of the mapping unit.
//
// For NP points at once it computes the squared Euclidean distance to one
// query point. Squared distances order exactly like distances, so no square
// root is needed. Outputs:
//  * cmp_o: comparator structs keyed by the distance (k-NN / ball query) or,
//    when fps is set, by min(recorded distance, new distance), the FPS rule.
//    When ball is set, points farther than the radius (d > r2) become
//    sentinels so that they never enter the top-k.
//  * dist_upd: the min-updated distance, written back to the sorter buffer
//    by the fetch stage when running farthest point sampling.
// Invalid points become sentinels (key 0 under FPS). Combinational.
module distance_unit
  import pointacc_pkg::*;
#(
  parameter int NP = 64
) (
  input  point_t            pts [NP],
  input  coord_t            qx,
  input  coord_t            qy,
  input  coord_t            qz,
  input  logic              fps,
  input  logic              ball,
  input  logic [DIST_W-1:0] r2,
  output cmp_t              cmp_o    [NP],
  output logic [DIST_W-1:0] dist_upd [NP]
);
  always_comb begin
    for (int i = 0; i < NP; i++) begin
      logic signed [COORD_W:0] dx, dy, dz;
      logic [DIST_W-1:0] d, m;
      dx = {pts[i].x[COORD_W-1], pts[i].x} - {qx[COORD_W-1], qx};
      dy = {pts[i].y[COORD_W-1], pts[i].y} - {qy[COORD_W-1], qy};
      dz = {pts[i].z[COORD_W-1], pts[i].z} - {qz[COORD_W-1], qz};
      d  = DIST_W'(dx * dx) + DIST_W'(dy * dy) + DIST_W'(dz * dz);
      m  = (d < pts[i].mind) ? d : pts[i].mind;
      dist_upd[i] = m;
      cmp_o[i].key   = fps ? m : d;
      cmp_o[i].valid = pts[i].valid && !(ball && !fps && d > r2);
      cmp_o[i].src   = 1'b1;
      cmp_o[i].idx   = pts[i].idx;
      if (!cmp_o[i].valid) begin
        // Sentinels sort last; for FPS an invalid lane instead gets key 0 so
        // that the last element of a sorted window is its largest valid one.
        cmp_o[i] = cmp_sentinel();
        if (fps) cmp_o[i].key = '0;
      end
    end
  end
endmodule
