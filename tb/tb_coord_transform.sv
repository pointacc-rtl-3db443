// Testbench for coord_transform: shifts the paper's 2-D kernel mapping
// example cloud by (1,1) and random clouds by random offsets, and compares
// each key with a key computed here as (coordinate + 32768) per field.
module tb_coord_transform;
  import pointacc_pkg::*;
  localparam int W = 8;
  point_t pts [W];
  cmp_t   c [W];
  coord_t ox, oy, oz;
  logic   src;
  int checks = 0, failures = 0;

  coord_transform #(.W(W)) dut (.pts, .off_x(ox), .off_y(oy), .off_z(oz), .src, .cmp_o(c));

  function automatic logic [47:0] ref_key(int x, int y, int z);
    logic [15:0] a, b, d;
    a = 16'(x + 32768); b = 16'(y + 32768); d = 16'(z + 32768);
    return {a, b, d};
  endfunction

  task automatic check_all(int xs[W], int ys[W], int zs[W], bit vs[W]);
    #1;
    for (int i = 0; i < W; i++) begin
      checks++;
      if (vs[i]) begin
        if (c[i].key !== ref_key(xs[i] + ox, ys[i] + oy, zs[i] + oz) || !c[i].valid ||
            c[i].src !== src || c[i].idx !== pts[i].idx) begin
          failures++; $display("FAIL lane %0d key %h", i, c[i].key);
        end
      end else if (c[i].valid || c[i].key !== KEY_MAX) begin
        failures++; $display("FAIL lane %0d should be sentinel", i);
      end
    end
  endtask

  initial begin
    int xs[W], ys[W], zs[W]; bit vs[W];
    int ex[5] = '{1, 2, 2, 3, 4};
    int ey[5] = '{1, 2, 4, 2, 3};
    // paper example: +(1,1) for w(-1,-1)
    ox = 1; oy = 1; oz = 0; src = 1;
    for (int i = 0; i < W; i++) begin
      vs[i] = i < 5; xs[i] = i < 5 ? ex[i] : 0; ys[i] = i < 5 ? ey[i] : 0; zs[i] = 0;
      pts[i] = '0; pts[i].valid = vs[i];
      pts[i].x = coord_t'(xs[i]); pts[i].y = coord_t'(ys[i]); pts[i].z = 0; pts[i].idx = IDX_W'(i);
    end
    check_all(xs, ys, zs, vs);
    // shifted (2,2),(3,3),(3,5),(4,3),(5,4) stay sorted
    for (int i = 0; i < 4; i++) begin checks++; if (!(c[i].key < c[i+1].key)) failures++; end
    repeat (200) begin
      ox = coord_t'($urandom_range(0, 200) - 100); oy = coord_t'($urandom_range(0, 200) - 100);
      oz = coord_t'($urandom_range(0, 200) - 100); src = 1'($urandom);
      for (int i = 0; i < W; i++) begin
        vs[i] = 1'($urandom); xs[i] = $urandom_range(0, 20000) - 10000;
        ys[i] = $urandom_range(0, 20000) - 10000; zs[i] = $urandom_range(0, 20000) - 10000;
        pts[i].valid = vs[i]; pts[i].x = coord_t'(xs[i]); pts[i].y = coord_t'(ys[i]);
        pts[i].z = coord_t'(zs[i]); pts[i].idx = IDX_W'($urandom); pts[i].mind = '0;
      end
      check_all(xs, ys, zs, vs);
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
