// Full-size testbench: pointacc_top and the DRAM model with their default
// parameters (N = 64, 64 x 64 array, 256 KB input and output buffers,
// 27 weight matrices, 64 MIRs, 64-entry map FIFO). Runs one complete sparse
// 3x3x3 convolution layer end to end (64 -> 64 channels) over a random
// 300-point cloud: the MMU is started, the MPU produces the kernel maps for
// all 27 offsets, the MMU fetches features on demand (block size 8), drives
// the matrix unit and writes the outputs to DRAM, and every output row is
// compared with a brute-force result. Then one dense layer over the same
// points. Prints the mechanism counters.
module tb_pointacc_top_full;
  import pointacc_pkg::*;
  localparam int W = 32, ROWS = 64, COLS = 64, NW = 27, NPTS = 300;
  localparam int SAW = 7, MAW = 7, CW = 6, OAW = 10, WAW = $clog2(NW * ROWS);
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
  logic [31:0] feat_base, out_base, rd_req_addr, wr_addr;
  logic [OAW:0] n_out, n_points;
  logic map_out_valid, map_out_ready;
  map_t map_out;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [8:0] rd_req_len;
  logic [FW-1:0] rd_resp_data;
  logic [PWD-1:0] wr_data;
  logic ev_mpu_stall, ev_fifo_full, ev_hit, ev_miss, ev_wload, ev_prefetch, ev_release;
  int checks = 0, failures = 0, cyc = 0;
  int c_stall = 0, c_full = 0, c_hit = 0, c_miss = 0, c_wload = 0, c_pref = 0, c_rel = 0;

  pointacc_top dut (.*);
  dram_model u_dram (.clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .rd_resp_valid, .rd_resp_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      c_stall += int'(ev_mpu_stall); c_full += int'(ev_fifo_full); c_hit += int'(ev_hit);
      c_miss += int'(ev_miss); c_wload += int'(ev_wload); c_pref += int'(ev_prefetch);
      c_rel += int'(ev_release);
    end
  end

  int ix [$], iy [$], iz [$];
  int f [NPTS][ROWS];
  int wm [NW][ROWS][COLS];
  int ex [NPTS][COLS];

  task automatic check_rows(int base, int n, string what);
    for (int q = 0; q < n; q++) begin
      checks++;
      for (int j = 0; j < COLS; j++)
        if ($signed(u_dram.omem[base + q][j*PSUM_W +: PSUM_W]) != ex[q][j]) begin
          failures++; $display("FAIL %s row %0d col %0d", what, q, j); break;
        end
    end
  endtask

  initial begin
    logic [KEY_W-1:0] keys [$];
    bit seen [logic [KEY_W-1:0]];
    int fb, ob, t0;
    sb_we = 0; mb_we = 0; wb_we = 0; sb_waddr = 0; mb_waddr = 0; wb_waddr = 0; wb_wdata = 0;
    for (int l = 0; l < W; l++) begin sb_wdata[l] = '0; mb_wdata[l] = '0; end
    mpu_start = 0; mpu_op = OP_KMAP; n_in_rows = 0; n_out_rows = 0; off_x = 0; off_y = 0;
    off_z = 0; widx = 0; k = 0; ball = 0; r2 = 0; n_samples = 0; first = 0;
    mmu_start = 0; mmu_dense = 0; log_bs = 0; ctile = 0; feat_base = 0; out_base = 0;
    n_out = 0; n_points = 0; dense_w = 0; maps_last = 0; maps_to_host = 0; map_out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1; #1;

    // cloud: distinct points in [-4, 4]^3, coordinate order
    while (keys.size() < NPTS) begin
      logic [KEY_W-1:0] kk;
      kk = coord_key(coord_t'($urandom_range(0, 8) - 4), coord_t'($urandom_range(0, 8) - 4),
                     coord_t'($urandom_range(0, 8) - 4));
      if (!seen.exists(kk)) begin seen[kk] = 1; keys.push_back(kk); end
    end
    keys.sort();
    foreach (keys[i]) begin
      ix.push_back(int'(coord_t'({~keys[i][47], keys[i][46:32]})));
      iy.push_back(int'(coord_t'({~keys[i][31], keys[i][30:16]})));
      iz.push_back(int'(coord_t'({~keys[i][15], keys[i][14:0]})));
    end
    for (int r = 0; r < (NPTS + W - 1) / W; r++) begin
      for (int l = 0; l < W; l++) begin
        point_t p;
        int i;
        i = r * W + l; p = '0;
        if (i < NPTS) begin
          p.valid = 1; p.x = coord_t'(ix[i]); p.y = coord_t'(iy[i]); p.z = coord_t'(iz[i]);
          p.idx = IDX_W'(i);
        end
        sb_wdata[l] = p; mb_wdata[l] = p;
      end
      sb_we = 1; mb_we = 1; sb_waddr = SAW'(r); mb_waddr = MAW'(r);
      @(posedge clk); #1;
    end
    sb_we = 0; mb_we = 0;
    // features in DRAM, weights into the weight buffer
    fb = 16;
    for (int p = 0; p < NPTS; p++)
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

    // reference for the sparse layer
    for (int q = 0; q < NPTS; q++) for (int j = 0; j < COLS; j++) ex[q][j] = 0;
    for (int w = 0; w < 27; w++)
      foreach (ix[p]) foreach (ix[q])
        if (ix[p] + w / 9 - 1 == ix[q] && iy[p] + (w / 3) % 3 - 1 == iy[q] && iz[p] + w % 3 - 1 == iz[q])
          for (int j = 0; j < COLS; j++)
            for (int i = 0; i < ROWS; i++) ex[q][j] += f[p][i] * wm[w][i][j];

    // ---------------- sparse convolution layer
    t0 = cyc;
    ob = 1000;
    n_in_rows = (SAW+1)'((NPTS + W - 1) / W); n_out_rows = (MAW+1)'((NPTS + W - 1) / W);
    log_bs = 3'd3; ctile = 0; feat_base = 32'(fb); out_base = 32'(ob); n_out = (OAW+1)'(NPTS);
    mmu_start = 1; @(posedge clk); #1; mmu_start = 0;
    for (int w = 0; w < 27; w++) begin
      off_x = coord_t'(w / 9 - 1); off_y = coord_t'((w / 3) % 3 - 1); off_z = coord_t'(w % 3 - 1);
      widx = WIDX_W'(w);
      mpu_op = OP_KMAP; mpu_start = 1; @(posedge clk); #1; mpu_start = 0;
      while (!mpu_done) begin @(posedge clk); #1; end
    end
    maps_last = 1;
    while (!mmu_done) begin @(posedge clk); #1; end
    maps_last = 0;
    $display("sparse layer: %0d cycles", cyc - t0);
    check_rows(ob, NPTS, "sparse");

    // ---------------- dense layer through weight 13
    for (int p = 0; p < NPTS; p++) for (int j = 0; j < COLS; j++) begin
      ex[p][j] = 0;
      for (int i = 0; i < ROWS; i++) ex[p][j] += f[p][i] * wm[13][i][j];
    end
    t0 = cyc; ob = 2000;
    mmu_dense = 1; log_bs = 3'd6; out_base = 32'(ob); n_points = (OAW+1)'(NPTS); dense_w = 13;
    mmu_start = 1; @(posedge clk); #1; mmu_start = 0;
    while (!mmu_done) begin @(posedge clk); #1; end
    $display("dense layer: %0d cycles", cyc - t0);
    check_rows(ob, NPTS, "dense");

    $display("mechanisms: mpu_stall=%0d fifo_full=%0d hit=%0d miss=%0d wload=%0d prefetch=%0d release=%0d",
             c_stall, c_full, c_hit, c_miss, c_wload, c_pref, c_rel);
    checks++; if (c_hit == 0 || c_miss == 0 || c_wload == 0 || c_pref == 0 || c_rel == 0) begin
      failures++; $display("FAIL a memory mechanism never happened");
    end
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
