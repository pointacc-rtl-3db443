// Testbench for distance_unit: random points and query points; squared
// distances, the FPS min update and the ball query cut are recomputed here
// with plain integer arithmetic.
module tb_distance_unit;
  import pointacc_pkg::*;
  localparam int NP = 8;
  point_t pts [NP];
  cmp_t   c [NP];
  logic [DIST_W-1:0] upd [NP], r2;
  coord_t qx, qy, qz;
  logic fps, ball;
  int checks = 0, failures = 0;

  distance_unit #(.NP(NP)) dut (.pts, .qx, .qy, .qz, .fps, .ball, .r2, .cmp_o(c), .dist_upd(upd));

  initial begin
    repeat (500) begin
      longint d, m; bit expv;
      qx = coord_t'($urandom); qy = coord_t'($urandom); qz = coord_t'($urandom);
      fps = 1'($urandom); ball = 1'($urandom); r2 = DIST_W'({$urandom} * 4);
      for (int i = 0; i < NP; i++) begin
        pts[i].valid = ($urandom_range(0, 7) != 0);
        pts[i].x = coord_t'($urandom); pts[i].y = coord_t'($urandom); pts[i].z = coord_t'($urandom);
        pts[i].idx = IDX_W'($urandom);
        pts[i].mind = DIST_W'({$urandom, $urandom}) >> $urandom_range(0, 47);
      end
      #1;
      for (int i = 0; i < NP; i++) begin
        longint dx, dy, dz;
        dx = longint'(pts[i].x) - longint'(qx);
        dy = longint'(pts[i].y) - longint'(qy);
        dz = longint'(pts[i].z) - longint'(qz);
        d = dx * dx + dy * dy + dz * dz;
        m = (d < longint'(pts[i].mind)) ? d : longint'(pts[i].mind);
        checks++;
        if (longint'(upd[i]) != m) begin failures++; $display("FAIL upd %0d", i); end
        expv = pts[i].valid && !(ball && !fps && d > longint'(r2));
        checks++;
        if (c[i].valid !== expv) begin failures++; $display("FAIL valid %0d", i); end
        else if (expv && (longint'(c[i].key) != (fps ? m : d) || c[i].idx !== pts[i].idx)) begin
          failures++; $display("FAIL key %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
