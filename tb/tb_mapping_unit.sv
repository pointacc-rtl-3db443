// Testbench for mapping_unit with N = 8 (rows of W = 4 points) and 16-row
// buffers. Clouds are random, distinct integer points in a small box, stored
// in coordinate order with index = buffer position; the last row is padded
// with invalid lanes. map_ready is randomly low so the serialiser backs up.
//  * KMAP: all 27 offsets of a 3x3x3 kernel; the set of maps must equal the
//    brute-force set {(i, j, w) : in[i] + off_w == out[j]}.
//  * KNN / ball query: for every output point the emitted maps must have
//    ranks 0..n-1, distinct inputs, and distances equal to the brute-force
//    sorted distance list (n = min(k, number of candidates)).
//  * FPS: the first sample is `first`; every later sample must have the
//    largest distance to the already-sampled set (ties may go either way, the
//    reference follows the unit's choice).
// Counts stall cycles and requires at least one.
module tb_mapping_unit;
  import pointacc_pkg::*;
  localparam int N = 8, W = 4, SB = 16, MB = 16;
  localparam int SAW = 4, MAW = 4, CW = 3;
  logic clk = 0, rst_n = 0;
  logic sb_we, mb_we, start, busy, done, map_valid, map_ready, stall, ball;
  logic [SAW-1:0] sb_waddr;
  logic [MAW-1:0] mb_waddr;
  point_t sb_wdata [W], mb_wdata [W];
  mpu_op_e op;
  logic [SAW:0] n_in_rows;
  logic [MAW:0] n_out_rows;
  coord_t off_x, off_y, off_z;
  logic [WIDX_W-1:0] widx;
  logic [CW-1:0] k;
  logic [DIST_W-1:0] r2;
  logic [IDX_W-1:0] n_samples, first;
  map_t map_data;
  int checks = 0, failures = 0, stalls = 0;

  mapping_unit #(.N(N), .SB_ROWS(SB), .MB_ROWS(MB)) dut (.clk, .rst_n,
    .sb_we, .sb_waddr, .sb_wdata, .mb_we, .mb_waddr, .mb_wdata,
    .start, .op, .n_in_rows, .n_out_rows, .off_x, .off_y, .off_z, .widx, .k, .ball, .r2,
    .n_samples, .first, .busy, .done, .map_valid, .map_ready, .map_data, .stall);
  always #5 clk = ~clk;

  int ix [$], iy [$], iz [$], ox [$], oy [$], oz [$];
  map_t got [$];

  always @(posedge clk) if (rst_n) begin
    if (map_valid && map_ready) got.push_back(map_data);
    if (stall) stalls++;
    map_ready <= ($urandom_range(0, 99) < 70);
  end

  // random distinct points in [-R, R]^3, sorted by coordinate key
  task automatic make_cloud(int n, int r, output int xs [$], output int ys [$], output int zs [$]);
    logic [KEY_W-1:0] keys [$];
    bit seen [logic [KEY_W-1:0]];
    xs.delete(); ys.delete(); zs.delete();
    while (keys.size() < n) begin
      int x, y, z;
      logic [KEY_W-1:0] kk;
      x = $urandom_range(0, 2*r) - r; y = $urandom_range(0, 2*r) - r; z = $urandom_range(0, 2*r) - r;
      kk = coord_key(coord_t'(x), coord_t'(y), coord_t'(z));
      if (!seen.exists(kk)) begin seen[kk] = 1; keys.push_back(kk); end
    end
    keys.sort();
    foreach (keys[i]) begin
      xs.push_back(int'(coord_t'({~keys[i][47], keys[i][46:32]})));
      ys.push_back(int'(coord_t'({~keys[i][31], keys[i][30:16]})));
      zs.push_back(int'(coord_t'({~keys[i][15], keys[i][14:0]})));
    end
  endtask

  task automatic load(bit to_sb, int xs [$], int ys [$], int zs [$]);
    int rows;
    rows = (xs.size() + W - 1) / W;
    for (int r = 0; r < rows; r++) begin
      for (int l = 0; l < W; l++) begin
        point_t p;
        int i;
        i = r * W + l;
        p = '0;
        if (i < xs.size()) begin
          p.valid = 1; p.x = coord_t'(xs[i]); p.y = coord_t'(ys[i]); p.z = coord_t'(zs[i]);
          p.idx = IDX_W'(i);
        end
        sb_wdata[l] = p; mb_wdata[l] = p;
      end
      sb_we = to_sb; mb_we = !to_sb; sb_waddr = SAW'(r); mb_waddr = MAW'(r);
      @(posedge clk); #1;
    end
    sb_we = 0; mb_we = 0;
  endtask

  task automatic run(mpu_op_e o);
    op = o; start = 1;
    @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  function automatic int d2(int ax, int ay, int az, int bx, int by, int bz);
    return (ax-bx)*(ax-bx) + (ay-by)*(ay-by) + (az-bz)*(az-bz);
  endfunction

  initial begin
    sb_we = 0; mb_we = 0; start = 0; op = OP_KMAP; sb_waddr = 0; mb_waddr = 0;
    for (int l = 0; l < W; l++) begin sb_wdata[l] = '0; mb_wdata[l] = '0; end
    n_in_rows = 0; n_out_rows = 0; off_x = 0; off_y = 0; off_z = 0; widx = 0;
    k = 0; ball = 0; r2 = 0; n_samples = 0; first = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;

    // ------------------------------------------------ kernel mapping
    repeat (3) begin
      int nin, nout;
      nin = $urandom_range(1, SB * W); nout = $urandom_range(1, MB * W);
      make_cloud(nin, 3, ix, iy, iz);
      make_cloud(nout, 3, ox, oy, oz);
      load(1, ix, iy, iz); load(0, ox, oy, oz);
      n_in_rows = (SAW+1)'((nin + W - 1) / W); n_out_rows = (MAW+1)'((nout + W - 1) / W);
      for (int w = 0; w < 27; w++) begin
        map_t exp [$];
        int dx, dy, dz;
        dx = w / 9 - 1; dy = (w / 3) % 3 - 1; dz = w % 3 - 1;
        off_x = coord_t'(dx); off_y = coord_t'(dy); off_z = coord_t'(dz); widx = WIDX_W'(w);
        got.delete(); exp.delete();
        run(OP_KMAP);
        foreach (ix[i]) foreach (ox[j])
          if (ix[i] + dx == ox[j] && iy[i] + dy == oy[j] && iz[i] + dz == oz[j])
            exp.push_back('{p: IDX_W'(i), q: IDX_W'(j), w: WIDX_W'(w)});
        exp.sort(); got.sort();
        checks++;
        if (exp != got) begin
          failures++; $display("FAIL kmap offset %0d: %0d maps vs %0d expected", w, got.size(), exp.size());
        end
      end
    end

    // ------------------------------------------------ kNN and ball query
    for (int t = 0; t < 4; t++) begin
      int nin, nout, kk, rr;
      nin = $urandom_range(1, SB * W); nout = $urandom_range(1, 12);
      make_cloud(nin, 6, ix, iy, iz);
      make_cloud(nout, 6, ox, oy, oz);
      load(1, ix, iy, iz); load(0, ox, oy, oz);
      n_in_rows = (SAW+1)'((nin + W - 1) / W); n_out_rows = (MAW+1)'((nout + W - 1) / W);
      kk = $urandom_range(1, W); rr = $urandom_range(2, 40);
      k = CW'(kk); ball = t[0]; r2 = DIST_W'(rr);
      got.delete();
      run(OP_KNN);
      foreach (ox[j]) begin
        int ds [$];
        int n, seenp [int];
        map_t mine [$];
        ds.delete(); seenp.delete(); mine.delete();
        foreach (ix[i]) begin
          int d;
          d = d2(ix[i], iy[i], iz[i], ox[j], oy[j], oz[j]);
          if (!ball || d <= rr) ds.push_back(d);
        end
        ds.sort();
        n = (kk < ds.size()) ? kk : ds.size();
        foreach (got[m]) if (got[m].q == IDX_W'(j)) mine.push_back(got[m]);
        checks++;
        if (mine.size() != n) begin
          failures++; $display("FAIL knn q=%0d: %0d maps, expected %0d", j, mine.size(), n);
        end else begin
          foreach (mine[m]) begin
            int p;
            p = int'(mine[m].p);
            checks++;
            if (mine[m].w != WIDX_W'(m) || p >= nin || seenp.exists(p) ||
                d2(ix[p], iy[p], iz[p], ox[j], oy[j], oz[j]) != ds[m]) begin
              failures++; $display("FAIL knn q=%0d rank %0d p=%0d", j, m, p);
            end
            seenp[p] = 1;
          end
        end
      end
    end

    // ------------------------------------------------ farthest point sampling
    repeat (3) begin
      int nin, ns, fst;
      int mind [$];
      nin = $urandom_range(2, SB * W); ns = $urandom_range(1, nin < 20 ? nin : 20);
      fst = $urandom_range(0, nin - 1);
      make_cloud(nin, 20, ix, iy, iz);
      load(1, ix, iy, iz);
      n_in_rows = (SAW+1)'((nin + W - 1) / W);
      n_samples = IDX_W'(ns); first = IDX_W'(fst);
      got.delete(); mind.delete();
      run(OP_FPS);
      checks++;
      if (got.size() != ns) begin failures++; $display("FAIL fps count %0d vs %0d", got.size(), ns); end
      else begin
        foreach (ix[i]) mind.push_back(32'h7fff_ffff);
        foreach (got[t]) begin
          int s, mx;
          s = int'(got[t].p);
          checks++;
          if (got[t].q != IDX_W'(t) || s >= nin) begin failures++; $display("FAIL fps map %0d", t); break; end
          if (t == 0) begin
            if (s != fst) begin failures++; $display("FAIL fps first"); end
          end else begin
            mx = 0;
            foreach (mind[i]) if (mind[i] > mx) mx = mind[i];
            if (mind[s] != mx) begin failures++; $display("FAIL fps sample %0d: d=%0d max=%0d", t, mind[s], mx); end
          end
          foreach (mind[i]) begin
            int d;
            d = d2(ix[i], iy[i], iz[i], ix[s], iy[s], iz[s]);
            if (d < mind[i]) mind[i] = d;
          end
        end
      end
    end

    checks++; if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
