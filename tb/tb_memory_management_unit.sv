// Testbench for memory_management_unit (4 x 4 array, 32-row input and
// output buffers, 8 MIRs) with a real matrix_unit and the behavioural DRAM.
//  * Sparse: random maps grouped by weight (distinct outputs within a
//    weight) over 64 input points, so the 8-line cache both hits and
//    conflicts. Block sizes 1, 2, 4 and 8. Maps arrive with random gaps.
//    The rows written to DRAM must equal sum over maps of f[p] * W[w].
//  * Dense: n_points contiguous points through weight dense_w; row p must
//    equal f[p] * W[dense_w]; prefetch and release must happen.
// Hits, misses, weight loads, prefetches and releases are counted and each
// must occur.
module tb_memory_management_unit;
  import pointacc_pkg::*;
  localparam int ROWS = 4, COLS = 4, IB = 32, OB = 32, NW = 27, NMIR = 8, DAW = 16;
  localparam int OAW = 5, WAW = $clog2(NW * ROWS), RW = 2, LAT = ROWS + COLS - 1;
  localparam int FW = ROWS * FEAT_W, PWD = COLS * PSUM_W, WW = COLS * FEAT_W;
  localparam int NIN = 64;

  logic clk = 0, rst_n = 0;
  logic start, dense, busy, done, wb_we, map_ready;
  logic map_valid = 0, maps_end = 1;
  logic [2:0] log_bs;
  logic [3:0] ctile;
  logic [DAW-1:0] feat_base, out_base, rd_req_addr, wr_addr;
  logic [OAW:0] n_out, n_points;
  logic [WIDX_W-1:0] dense_w;
  logic [WAW-1:0] wb_waddr;
  logic [WW-1:0] wb_wdata;
  map_t map_data = '0;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [8:0] rd_req_len;
  logic [FW-1:0] rd_resp_data;
  logic [PWD-1:0] wr_data;
  logic mx_w_we, mx_in_valid, mx_out_valid;
  logic [RW-1:0] mx_w_row;
  logic signed [FEAT_W-1:0] mx_w_data [COLS], mx_in_vec [ROWS];
  logic signed [PSUM_W-1:0] mx_out_vec [COLS];
  logic [IDX_W-1:0] mx_in_tag, mx_out_tag;
  logic [$clog2(LAT+2)-1:0] mx_in_flight;
  logic ev_hit, ev_miss, ev_wload, ev_prefetch, ev_release;
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wload = 0, n_pref = 0, n_rel = 0;

  memory_management_unit #(.ROWS(ROWS), .COLS(COLS), .IB_ROWS(IB), .OB_ROWS(OB), .NW(NW),
    .NMIR(NMIR), .DAW(DAW)) dut (.clk, .rst_n, .start, .dense, .log_bs, .ctile, .feat_base,
    .out_base, .n_out, .n_points, .dense_w, .busy, .done, .wb_we, .wb_waddr, .wb_wdata,
    .map_valid, .map_ready, .map_data, .maps_end, .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_req_len, .rd_resp_valid, .rd_resp_data, .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .mx_w_we, .mx_w_row, .mx_w_data, .mx_in_valid, .mx_in_vec, .mx_in_tag, .mx_out_valid,
    .mx_out_vec, .mx_out_tag, .mx_in_flight, .ev_hit, .ev_miss, .ev_wload, .ev_prefetch,
    .ev_release);
  matrix_unit #(.ROWS(ROWS), .COLS(COLS)) u_mxu (.clk, .rst_n, .w_we(mx_w_we), .w_row(mx_w_row),
    .w_data(mx_w_data), .in_valid(mx_in_valid), .in_vec(mx_in_vec), .in_tag(mx_in_tag),
    .out_valid(mx_out_valid), .out_vec(mx_out_vec), .out_tag(mx_out_tag), .in_flight(mx_in_flight));
  dram_model #(.FW(FW), .PWD(PWD), .DAW(DAW), .FDEPTH(1024), .ODEPTH(1024)) u_dram (.clk, .rst_n,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    n_hit += int'(ev_hit); n_miss += int'(ev_miss); n_wload += int'(ev_wload);
    n_pref += int'(ev_prefetch); n_rel += int'(ev_release);
  end

  int f [NIN][ROWS];
  int wm [NW][ROWS][COLS];
  map_t mq [$];

  // map driver: random gaps, holds data until accepted
  always @(posedge clk) if (rst_n) begin
    if (map_valid && map_ready) void'(mq.pop_front());
    if (!map_valid || map_ready) begin
      map_valid <= (mq.size() > 0) && ($urandom_range(0, 3) != 0);
      if (mq.size() > 0) map_data <= mq[0];
    end
    maps_end <= (mq.size() == 0);
  end

  task automatic check_out(int base, int n, int ex [][COLS], string what);
    for (int q = 0; q < n; q++) begin
      checks++;
      for (int j = 0; j < COLS; j++)
        if ($signed(u_dram.omem[base + q][j*PSUM_W +: PSUM_W]) != ex[q][j]) begin
          failures++;
          $display("FAIL %s row %0d col %0d: %0d vs %0d", what, q, j,
                   $signed(u_dram.omem[base + q][j*PSUM_W +: PSUM_W]), ex[q][j]);
          break;
        end
    end
  endtask

  task automatic go();
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  initial begin
    int fb, ob;
    start = 0; dense = 0; log_bs = 0; ctile = 0; feat_base = 0; out_base = 0; n_out = 0;
    n_points = 0; dense_w = 0; wb_we = 0; wb_waddr = 0; wb_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    // features and weights
    fb = 100;
    for (int p = 0; p < NIN; p++)
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

    // ------------------------------------------------ sparse
    for (int t = 0; t < 8; t++) begin
      int ex [][COLS];
      int nq;
      nq = $urandom_range(4, OB);
      ex = new[nq];
      foreach (ex[q]) for (int j = 0; j < COLS; j++) ex[q][j] = 0;
      for (int w = 0; w < NW; w++) if ($urandom_range(0, 2) == 0) begin
        for (int q = 0; q < nq; q++) if ($urandom_range(0, 1) == 0) begin
          int p;
          p = $urandom_range(0, NIN - 1);
          // neighbouring outputs tend to use neighbouring inputs
          if ($urandom_range(0, 1) == 0) p = (q * 2) % NIN;
          mq.push_back('{p: IDX_W'(p), q: IDX_W'(q), w: WIDX_W'(w)});
          for (int j = 0; j < COLS; j++)
            for (int i = 0; i < ROWS; i++) ex[q][j] += f[p][i] * wm[w][i][j];
        end
      end
      ob = 300 + 40 * t;
      dense = 0; log_bs = 3'(t % 4); ctile = 4'(t); feat_base = DAW'(fb);
      out_base = DAW'(ob); n_out = (OAW+1)'(nq);
      go();
      checks++; if (mq.size() != 0) begin failures++; $display("FAIL maps left"); end
      check_out(ob, nq, ex, "sparse");
    end

    // ------------------------------------------------ dense
    for (int t = 0; t < 4; t++) begin
      int ex [][COLS];
      int np, dw;
      np = $urandom_range(1, OB); dw = $urandom_range(0, NW - 1);
      ex = new[np];
      foreach (ex[p]) for (int j = 0; j < COLS; j++) begin
        ex[p][j] = 0;
        for (int i = 0; i < ROWS; i++) ex[p][j] += f[p][i] * wm[dw][i][j];
      end
      ob = 700 + 40 * t;
      dense = 1; log_bs = 3'(1 + t % 3); feat_base = DAW'(fb); out_base = DAW'(ob);
      n_points = (OAW+1)'(np); dense_w = WIDX_W'(dw);
      go();
      check_out(ob, np, ex, "dense");
    end

    $display("events: hit=%0d miss=%0d wload=%0d prefetch=%0d release=%0d",
             n_hit, n_miss, n_wload, n_pref, n_rel);
    checks++; if (n_hit == 0)   begin failures++; $display("FAIL no hit"); end
    checks++; if (n_miss == 0)  begin failures++; $display("FAIL no miss"); end
    checks++; if (n_wload == 0) begin failures++; $display("FAIL no weight load"); end
    checks++; if (n_pref == 0)  begin failures++; $display("FAIL no prefetch"); end
    checks++; if (n_rel == 0)   begin failures++; $display("FAIL no release"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
