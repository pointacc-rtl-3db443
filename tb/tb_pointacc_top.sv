// End-to-end testbench for pointacc_top at a small size (N = 8, 4 x 4
// array, 32-row feature buffers, 4-entry map FIFO) with the behavioural DRAM.
//  1. Sparse 3x3x3 convolution: random input cloud, output cloud = input
//     cloud (stride 1). The MMU is started, then the MPU runs kernel mapping
//     for all 27 offsets; maps flow through the FIFO into the MMU, which
//     fetches features on demand through its cache, loads weights, drives the
//     matrix unit and writes the outputs to DRAM. Every output row must equal
//     the brute-force sum over neighbours of f[p] * W[offset]. Run for
//     several block sizes.
//  2. Dense layer (FC over all points) with prefetching; rows checked.
//  3. kNN and ball query with maps sent to the host; ranks and distances
//     checked against brute force.
//  4. Farthest point sampling to the host; the max-min rule is checked.
// Every mechanism is counted (MPU stall, FIFO full, cache hit, miss, weight
// load, prefetch, release, kernel maps, kNN maps, FPS samples, dense rows);
// one that never happens is a failure.
module tb_pointacc_top;
  import pointacc_pkg::*;
  localparam int N = 8, W = 4, SB = 16, MB = 16, FIFO_D = 4;
  localparam int ROWS = 4, COLS = 4, IB = 32, OB = 32, NW = 27, NMIR = 8, DAW = 16;
  localparam int SAW = 4, MAW = 4, CW = 3, OAW = 5, WAW = $clog2(NW * ROWS);
  localparam int FW = ROWS * FEAT_W, PWD = COLS * PSUM_W, WW = COLS * FEAT_W;

  logic clk = 0, rst_n = 0;
  logic sb_we, mb_we, wb_we, mpu_start, mpu_busy, mpu_done, ball;
  logic [SAW-1:0] sb_waddr;
  logic [MAW-1:0] mb_waddr;
  point_t sb_wdata [W], mb_wdata [W];
  logic [WAW-1:0] wb_waddr;
  logic [WW-1:0] wb_wdata;
  mpu_op_e mpu_op;
  logic [SAW:0] n_in_rows;
  logic [MAW:0] n_out_rows;
  coord_t off_x, off_y, off_z;
  logic [WIDX_W-1:0] widx, dense_w;
  logic [CW-1:0] k;
  logic [DIST_W-1:0] r2;
  logic [IDX_W-1:0] n_samples, first;
  logic mmu_start, mmu_dense, maps_last, maps_to_host, mmu_busy, mmu_done;
  logic [2:0] log_bs;
  logic [3:0] ctile;
  logic [DAW-1:0] feat_base, out_base, rd_req_addr, wr_addr;
  logic [OAW:0] n_out, n_points;
  logic map_out_valid, map_out_ready;
  map_t map_out;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [8:0] rd_req_len;
  logic [FW-1:0] rd_resp_data;
  logic [PWD-1:0] wr_data;
  logic ev_mpu_stall, ev_fifo_full, ev_hit, ev_miss, ev_wload, ev_prefetch, ev_release;
  int checks = 0, failures = 0;
  int c_stall = 0, c_full = 0, c_hit = 0, c_miss = 0, c_wload = 0, c_pref = 0, c_rel = 0;
  int c_kmaps = 0, c_knn = 0, c_fps = 0, c_dense = 0;

  pointacc_top #(.N(N), .SB_ROWS(SB), .MB_ROWS(MB), .FIFO_D(FIFO_D), .ROWS(ROWS), .COLS(COLS),
    .IB_ROWS(IB), .OB_ROWS(OB), .NW(NW), .NMIR(NMIR), .DAW(DAW)) dut (.*);
  dram_model #(.FW(FW), .PWD(PWD), .DAW(DAW), .FDEPTH(1024), .ODEPTH(1024)) u_dram (.clk, .rst_n,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);
  always #5 clk = ~clk;

  map_t hostq [$];
  always @(posedge clk) if (rst_n) begin
    c_stall += int'(ev_mpu_stall); c_full += int'(ev_fifo_full); c_hit += int'(ev_hit);
    c_miss += int'(ev_miss); c_wload += int'(ev_wload); c_pref += int'(ev_prefetch);
    c_rel += int'(ev_release);
    if (dut.u_mmu.map_valid && dut.u_mmu.map_ready) c_kmaps++;
    if (map_out_valid && map_out_ready) hostq.push_back(map_out);
    map_out_ready <= ($urandom_range(0, 99) < 60);
  end

  int ix [$], iy [$], iz [$], ox [$], oy [$], oz [$];
  int f [64][ROWS];
  int wm [NW][ROWS][COLS];

  task automatic make_cloud(int n, int r, output int xs [$], output int ys [$], output int zs [$]);
    logic [KEY_W-1:0] keys [$];
    bit seen [logic [KEY_W-1:0]];
    xs.delete(); ys.delete(); zs.delete();
    while (keys.size() < n) begin
      logic [KEY_W-1:0] kk;
      kk = coord_key(coord_t'($urandom_range(0, 2*r) - r), coord_t'($urandom_range(0, 2*r) - r),
                     coord_t'($urandom_range(0, 2*r) - r));
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
    for (int r = 0; r < (xs.size() + W - 1) / W; r++) begin
      for (int l = 0; l < W; l++) begin
        point_t p;
        int i;
        i = r * W + l; p = '0;
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

  task automatic mpu_run(mpu_op_e o);
    mpu_op = o; mpu_start = 1;
    @(posedge clk); #1; mpu_start = 0;
    while (!mpu_done) begin @(posedge clk); #1; end
  endtask

  task automatic check_rows(int base, int n, int ex [][COLS], string what);
    for (int q = 0; q < n; q++) begin
      checks++;
      for (int j = 0; j < COLS; j++)
        if ($signed(u_dram.omem[base + q][j*PSUM_W +: PSUM_W]) != ex[q][j]) begin
          failures++; $display("FAIL %s row %0d col %0d", what, q, j); break;
        end
    end
  endtask

  function automatic int d2(int ax, int ay, int az, int bx, int by, int bz);
    return (ax-bx)*(ax-bx) + (ay-by)*(ay-by) + (az-bz)*(az-bz);
  endfunction

  initial begin
    int fb;
    sb_we = 0; mb_we = 0; wb_we = 0; sb_waddr = 0; mb_waddr = 0; wb_waddr = 0; wb_wdata = 0;
    for (int l = 0; l < W; l++) begin sb_wdata[l] = '0; mb_wdata[l] = '0; end
    mpu_start = 0; mpu_op = OP_KMAP; n_in_rows = 0; n_out_rows = 0; off_x = 0; off_y = 0;
    off_z = 0; widx = 0; k = 0; ball = 0; r2 = 0; n_samples = 0; first = 0;
    mmu_start = 0; mmu_dense = 0; log_bs = 0; ctile = 0; feat_base = 0; out_base = 0;
    n_out = 0; n_points = 0; dense_w = 0; maps_last = 0; maps_to_host = 0;
    map_out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;

    fb = 64;
    for (int p = 0; p < 64; p++)
      for (int i = 0; i < ROWS; i++) begin
        f[p][i] = $urandom_range(0, 255) - 128;
        u_dram.fmem[fb + p][i*FEAT_W +: FEAT_W] = 8'(f[p][i]);
      end
    for (int w = 0; w < NW; w++)
      for (int i = 0; i < ROWS; i++) begin
        wb_we = 1; wb_waddr = WAW'(w * ROWS + i);
        for (int j = 0; j < COLS; j++) begin
          wm[w][i][j] = $urandom_range(0, 255) - 128;
          wb_wdata[j*FEAT_W +: FEAT_W] = 8'(wm[w][i][j]);
        end
        @(posedge clk); #1;
      end
    wb_we = 0;

    // ---------------------------------------- 1. sparse convolution
    for (int t = 0; t < 4; t++) begin
      int n, ob;
      int ex [][COLS];
      n = $urandom_range(8, OB);
      make_cloud(n, 2, ix, iy, iz);
      load(1, ix, iy, iz); load(0, ix, iy, iz);
      ex = new[n];
      foreach (ex[q]) for (int j = 0; j < COLS; j++) ex[q][j] = 0;
      for (int w = 0; w < 27; w++)
        foreach (ix[p]) foreach (ix[q])
          if (ix[p] + w / 9 - 1 == ix[q] && iy[p] + (w / 3) % 3 - 1 == iy[q] && iz[p] + w % 3 - 1 == iz[q])
            for (int j = 0; j < COLS; j++)
              for (int i = 0; i < ROWS; i++) ex[q][j] += f[p][i] * wm[w][i][j];
      ob = 200 + 40 * t;
      n_in_rows = (SAW+1)'((n + W - 1) / W); n_out_rows = (MAW+1)'((n + W - 1) / W);
      mmu_dense = 0; log_bs = 3'(t); ctile = 4'(t); feat_base = DAW'(fb); out_base = DAW'(ob);
      n_out = (OAW+1)'(n); maps_last = 0; maps_to_host = 0;
      mmu_start = 1; @(posedge clk); #1; mmu_start = 0;
      for (int w = 0; w < 27; w++) begin
        off_x = coord_t'(w / 9 - 1); off_y = coord_t'((w / 3) % 3 - 1); off_z = coord_t'(w % 3 - 1);
        widx = WIDX_W'(w);
        mpu_run(OP_KMAP);
      end
      maps_last = 1;
      while (!mmu_done) begin @(posedge clk); #1; end
      maps_last = 0;
      check_rows(ob, n, ex, "sparse conv");
    end

    // ---------------------------------------- 2. dense layer
    for (int t = 0; t < 2; t++) begin
      int np, dw, ob;
      int ex [][COLS];
      np = $urandom_range(5, OB); dw = $urandom_range(0, NW - 1); ob = 500 + 40 * t;
      ex = new[np];
      foreach (ex[p]) for (int j = 0; j < COLS; j++) begin
        ex[p][j] = 0;
        for (int i = 0; i < ROWS; i++) ex[p][j] += f[p][i] * wm[dw][i][j];
      end
      mmu_dense = 1; log_bs = 3'(1 + t); feat_base = DAW'(fb); out_base = DAW'(ob);
      n_points = (OAW+1)'(np); dense_w = WIDX_W'(dw);
      mmu_start = 1; @(posedge clk); #1; mmu_start = 0;
      while (!mmu_done) begin @(posedge clk); #1; end
      check_rows(ob, np, ex, "dense");
      c_dense += np;
    end
    mmu_dense = 0;

    // ---------------------------------------- 3. kNN / ball query to host
    maps_to_host = 1;
    for (int t = 0; t < 2; t++) begin
      int nin, nout, kk, rr;
      nin = $urandom_range(10, SB * W); nout = $urandom_range(1, 10);
      make_cloud(nin, 5, ix, iy, iz); make_cloud(nout, 5, ox, oy, oz);
      load(1, ix, iy, iz); load(0, ox, oy, oz);
      n_in_rows = (SAW+1)'((nin + W - 1) / W); n_out_rows = (MAW+1)'((nout + W - 1) / W);
      kk = $urandom_range(1, W); rr = 20;
      k = CW'(kk); ball = t[0]; r2 = DIST_W'(rr);
      hostq.delete();
      mpu_run(OP_KNN);
      while (dut.fifo_valid) @(posedge clk);
      repeat (3) @(posedge clk); #1;
      foreach (ox[j]) begin
        int ds [$];
        map_t mine [$];
        int n;
        ds.delete(); mine.delete();
        foreach (ix[i]) begin
          int d;
          d = d2(ix[i], iy[i], iz[i], ox[j], oy[j], oz[j]);
          if (!ball || d <= rr) ds.push_back(d);
        end
        ds.sort();
        n = (kk < ds.size()) ? kk : ds.size();
        foreach (hostq[m]) if (hostq[m].q == IDX_W'(j)) mine.push_back(hostq[m]);
        checks++;
        if (mine.size() != n) begin failures++; $display("FAIL knn count q=%0d", j); end
        else foreach (mine[m]) begin
          int p;
          p = int'(mine[m].p);
          checks++; c_knn++;
          if (mine[m].w != WIDX_W'(m) || p >= nin || d2(ix[p], iy[p], iz[p], ox[j], oy[j], oz[j]) != ds[m]) begin
            failures++; $display("FAIL knn q=%0d rank %0d", j, m);
          end
        end
      end
    end

    // ---------------------------------------- 4. FPS to host
    begin
      int nin, ns;
      int mind [$];
      nin = 40; ns = 12;
      make_cloud(nin, 15, ix, iy, iz);
      load(1, ix, iy, iz);
      n_in_rows = (SAW+1)'((nin + W - 1) / W); n_samples = IDX_W'(ns); first = IDX_W'(7);
      hostq.delete();
      mpu_run(OP_FPS);
      while (dut.fifo_valid) @(posedge clk);
      repeat (3) @(posedge clk); #1;
      checks++;
      if (hostq.size() != ns) begin failures++; $display("FAIL fps count %0d", hostq.size()); end
      else begin
        foreach (ix[i]) mind.push_back(32'h7fff_ffff);
        foreach (hostq[t]) begin
          int s, mx;
          s = int'(hostq[t].p); mx = 0;
          foreach (mind[i]) if (mind[i] > mx) mx = mind[i];
          checks++; c_fps++;
          if (s >= nin || (t == 0 && s != 7) || (t > 0 && mind[s] != mx)) begin
            failures++; $display("FAIL fps sample %0d", t);
          end else
            foreach (mind[i]) begin
              int d;
              d = d2(ix[i], iy[i], iz[i], ix[s], iy[s], iz[s]);
              if (d < mind[i]) mind[i] = d;
            end
        end
      end
    end
    maps_to_host = 0;

    $display("mechanisms: mpu_stall=%0d fifo_full=%0d hit=%0d miss=%0d wload=%0d prefetch=%0d release=%0d",
             c_stall, c_full, c_hit, c_miss, c_wload, c_pref, c_rel);
    $display("mechanisms: kernel_maps=%0d knn_maps=%0d fps_samples=%0d dense_rows=%0d",
             c_kmaps, c_knn, c_fps, c_dense);
    checks++; if (c_stall == 0) begin failures++; $display("FAIL no MPU stall"); end
    checks++; if (c_full  == 0) begin failures++; $display("FAIL FIFO never full"); end
    checks++; if (c_hit   == 0) begin failures++; $display("FAIL no cache hit"); end
    checks++; if (c_miss  == 0) begin failures++; $display("FAIL no cache miss"); end
    checks++; if (c_wload == 0) begin failures++; $display("FAIL no weight load"); end
    checks++; if (c_pref  == 0) begin failures++; $display("FAIL no prefetch"); end
    checks++; if (c_rel   == 0) begin failures++; $display("FAIL no release"); end
    checks++; if (c_kmaps == 0) begin failures++; $display("FAIL no kernel maps"); end
    checks++; if (c_knn   == 0) begin failures++; $display("FAIL no kNN maps"); end
    checks++; if (c_fps   == 0) begin failures++; $display("FAIL no FPS samples"); end
    checks++; if (c_dense == 0) begin failures++; $display("FAIL no dense rows"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
