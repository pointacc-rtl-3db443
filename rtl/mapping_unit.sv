// Mapping unit (MPU): finds the maps (input point, output point, weight) of
// a point cloud layer with one ranking-based datapath.
//
// Stages (the paper's six): FS fetches rows of points from the sorter buffer
// (input cloud) and merger buffer (output cloud) and writes back FPS
// distances; CD computes distances; ST sorts two halves of N/2; BF holds
// sorted halves; MS is the N merger (with the forwarding loop for streams
// of any length); DI detects intersections. A buffer row holds W = N/2
// points. Three operations, started by `start` with `op`:
//
//  * OP_KMAP  kernel mapping for one kernel offset. Stream A is the input
//             cloud shifted by `off` (= -delta), stream B the output cloud;
//             both must be stored in ascending coordinate order. merge_stream
//             merges them one window per cycle and intersection_detector
//             turns equal neighbours into maps with weight index `widx`.
//  * OP_KNN   k nearest neighbours (ball=0) or ball query (ball=1, radius^2
//             r2) for every point of the output cloud. Two input rows per
//             cycle go through CD and the two N/2 sorters; the two sorted
//             halves are merged and truncated to N/2, then merged with the
//             running best list and truncated again (TopK by truncated merge
//             sort). Emits up to k maps per output point, w = rank. k <= N/2.
//  * OP_FPS   farthest point sampling of n_samples points starting at point
//             `first`. One row per cycle: CD takes min(recorded, new distance),
//             FS writes it back, the sorter's last element gives the row
//             maximum and a history register keeps the pass maximum, which
//             becomes the next sample. Emits (p = sample, q = sample number,
//             w = 0).
//
// Maps leave one per cycle on a valid/ready port through a small
// serialising register; when it is full the merge pipeline stalls
// (`stall` pulses). Point indices must equal buffer positions (row*W+lane):
// the host stores clouds in index order, which for kernel mapping is also
// coordinate order. The host fills the buffers through the write ports while
// the unit is idle. `done` pulses for one cycle at the end of an operation.
//
// Following the paper: the operation set, the stage roles, the forwarding
// loop and threshold rule, the truncation for TopK, the min/max FPS loop.
// This design's own: the buffer row format, the running (rather than tree)
// accumulation of TopK, k <= N/2, one row per cycle for FPS, the control.
module mapping_unit
  import pointacc_pkg::*;
#(
  parameter int N       = 64,
  parameter int SB_ROWS = 128,
  parameter int MB_ROWS = 128,
  localparam int W   = N / 2,
  localparam int SAW = $clog2(SB_ROWS),
  localparam int MAW = $clog2(MB_ROWS),
  localparam int LWW = $clog2(W),
  localparam int CW  = $clog2(W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // buffer fill (host / DRAM loader)
  input  logic              sb_we,
  input  logic [SAW-1:0]    sb_waddr,
  input  point_t            sb_wdata [W],
  input  logic              mb_we,
  input  logic [MAW-1:0]    mb_waddr,
  input  point_t            mb_wdata [W],
  // command
  input  logic              start,
  input  mpu_op_e           op,
  input  logic [SAW:0]      n_in_rows,
  input  logic [MAW:0]      n_out_rows,
  input  coord_t            off_x,
  input  coord_t            off_y,
  input  coord_t            off_z,
  input  logic [WIDX_W-1:0] widx,
  input  logic [CW-1:0]     k,
  input  logic              ball,
  input  logic [DIST_W-1:0] r2,
  input  logic [IDX_W-1:0]  n_samples,
  input  logic [IDX_W-1:0]  first,
  output logic              busy,
  output logic              done,
  // maps out
  output logic              map_valid,
  input  logic              map_ready,
  output map_t              map_data,
  // events
  output logic              stall
);
  localparam int PW = $bits(point_t);
  localparam int DW = PW * W;

  typedef enum logic [3:0] {
    S_IDLE, S_KM_PRIME, S_KM_RUN,
    S_KN_FETCHQ, S_KN_LATCHQ, S_KN_PASS, S_KN_WAIT, S_KN_EMIT,
    S_FP_FETCH, S_FP_LATCH, S_FP_PASS, S_FP_WAIT, S_FINISH
  } state_e;
  state_e state;

  // ---------------------------------------------------------------- buffers
  logic           sb_ren [2], mb_ren [1];
  logic [SAW-1:0] sb_raddr [2];
  logic [MAW-1:0] mb_raddr [1];
  logic [DW-1:0]  sb_rd [2], mb_rd [1];
  logic           sb_wen_i;
  logic [SAW-1:0] sb_waddr_i;
  point_t         sb_wdata_i [W];
  point_t         sbr0 [W], sbr1 [W], mbr [W];
  logic [DW-1:0]  sb_wpack_i, sb_wpack_h, mb_wpack;

  buffer_ram #(.DEPTH(SB_ROWS), .DW(DW), .NR(2)) u_sorter_buffer (
    .clk, .we(sb_we || sb_wen_i),
    .waddr(sb_wen_i ? sb_waddr_i : sb_waddr),
    .wdata(sb_wen_i ? sb_wpack_i : sb_wpack_h),
    .ren(sb_ren), .raddr(sb_raddr), .rdata(sb_rd));

  buffer_ram #(.DEPTH(MB_ROWS), .DW(DW), .NR(1)) u_merger_buffer (
    .clk, .we(mb_we), .waddr(mb_waddr), .wdata(mb_wpack),
    .ren(mb_ren), .raddr(mb_raddr), .rdata(mb_rd));

  always_comb begin
    for (int i = 0; i < W; i++) begin
      sb_wpack_i[i*PW +: PW] = sb_wdata_i[i];
      sb_wpack_h[i*PW +: PW] = sb_wdata[i];
      mb_wpack[i*PW +: PW]   = mb_wdata[i];
      sbr0[i] = sb_rd[0][i*PW +: PW];
      sbr1[i] = sb_rd[1][i*PW +: PW];
      mbr[i]  = mb_rd[0][i*PW +: PW];
    end
  end

  // ------------------------------------------------------ serialising stage
  map_t          s2_maps [W];
  logic [CW-1:0] s2_cnt, s2_pos;
  logic          s2_free, s2_load;
  map_t          s2_lmaps [W];
  logic [CW-1:0] s2_lcnt;

  assign map_valid = s2_pos < s2_cnt;
  assign map_data  = s2_maps[LWW'(s2_pos)];
  assign s2_free   = (s2_pos == s2_cnt) || (s2_pos + 1'b1 == s2_cnt && map_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_cnt <= '0; s2_pos <= '0;
    end else if (s2_load) begin
      s2_maps <= s2_lmaps;
      s2_cnt  <= s2_lcnt;
      s2_pos  <= '0;
    end else if (map_valid && map_ready) begin
      s2_pos <= s2_pos + 1'b1;
    end
  end

  // ------------------------------------------------------ kernel mapping path
  logic [SAW:0] ptr_a;
  logic [MAW:0] ptr_b;
  logic         a_done, b_done, adv_a, adv_b, ms_en, ms_start, ms_valid, ms_fin;
  cmp_t         a_win [W], b_win [W], ms_out [W], prev_last;
  map_t         di_maps [W];
  logic [CW-1:0] di_cnt;
  coord_t       zero_c;
  assign zero_c = '0;

  coord_transform #(.W(W)) u_shift_in (
    .pts(sbr0), .off_x, .off_y, .off_z, .src(1'b1), .cmp_o(a_win));
  coord_transform #(.W(W)) u_key_out (
    .pts(mbr), .off_x(zero_c), .off_y(zero_c), .off_z(zero_c), .src(1'b0), .cmp_o(b_win));

  assign a_done   = ptr_a >= n_in_rows;
  assign b_done   = ptr_b >= (MAW+1)'(n_out_rows);
  assign ms_start = (state == S_KM_PRIME);
  assign ms_en    = (state == S_KM_RUN) && (!ms_valid || s2_free);

  merge_stream #(.W(W)) u_merge (
    .clk, .rst_n, .en(ms_en), .start(ms_start),
    .a_win, .a_done, .b_win, .b_done, .adv_a, .adv_b,
    .out_win(ms_out), .out_valid(ms_valid), .finished(ms_fin));

  intersection_detector #(.W(W)) u_di (
    .prev_last, .win(ms_out), .widx, .maps(di_maps), .count(di_cnt));

  // ------------------------------------------------------ distance path
  point_t       cd_pts [N];
  cmp_t         cd_cmp [N];
  logic [DIST_W-1:0] cd_upd [N];
  coord_t       qx, qy, qz;
  logic [IDX_W-1:0] qidx;
  logic         fps_mode, first_pass;
  logic         p1, p2;               // pipeline valids
  logic [SAW-1:0] p1_row;
  logic         p1_hi_ok;
  cmp_t         st0_in [W], st1_in [W], st0 [W], st1 [W];
  cmp_t         bf0 [W], bf1 [W], m1 [N], m2 [N], best [W];
  cmp_t         hist;

  always_comb begin
    for (int i = 0; i < W; i++) begin
      cd_pts[i]   = sbr0[i];
      cd_pts[W+i] = sbr1[i];
      cd_pts[W+i].valid = sbr1[i].valid && p1_hi_ok && !fps_mode;
      if (first_pass) begin
        cd_pts[i].mind   = '1;
        cd_pts[W+i].mind = '1;
      end
    end
  end

  distance_unit #(.NP(N)) u_cd (
    .pts(cd_pts), .qx, .qy, .qz, .fps(fps_mode), .ball, .r2,
    .cmp_o(cd_cmp), .dist_upd(cd_upd));

  always_comb begin
    for (int i = 0; i < W; i++) begin
      st0_in[i] = cd_cmp[i];
      st1_in[i] = cd_cmp[W+i];
    end
  end

  bitonic_sorter #(.W(W)) u_sort0 (.in(st0_in), .out(st0));
  bitonic_sorter #(.W(W)) u_sort1 (.in(st1_in), .out(st1));
  bitonic_merger #(.W(W)) u_topk_m1 (.a(bf0), .b(bf1), .out(m1));
  cmp_t m1_lo [W];
  always_comb for (int i = 0; i < W; i++) m1_lo[i] = m1[i];
  bitonic_merger #(.W(W)) u_topk_m2 (.a(best), .b(m1_lo), .out(m2));

  // FPS write-back of min-updated distances (stage FS)
  always_comb begin
    sb_wen_i   = fps_mode && p1;
    sb_waddr_i = p1_row;
    for (int i = 0; i < W; i++) begin
      sb_wdata_i[i]      = sbr0[i];
      sb_wdata_i[i].mind = cd_upd[i];
    end
  end

  // ------------------------------------------------------ control
  logic [SAW:0]     pass_row;
  logic [MAW+LWW:0] qpos;          // current output point (KNN)
  logic [IDX_W-1:0] t_cnt, sel;
  logic [LWW-1:0]   lane_q;
  point_t           qpt;

  assign busy  = state != S_IDLE;
  assign stall = (state == S_KM_RUN) && !ms_en;

  always_comb begin
    // read port defaults
    sb_ren[0] = 1'b1; sb_ren[1] = 1'b1; mb_ren[0] = 1'b1;
    sb_raddr[0] = SAW'(ptr_a); sb_raddr[1] = '0; mb_raddr[0] = MAW'(ptr_b);
    unique case (state)
      S_KM_PRIME: begin sb_raddr[0] = '0; mb_raddr[0] = '0; end
      S_KM_RUN: begin
        sb_raddr[0] = SAW'(ms_en ? ptr_a + (SAW+1)'(adv_a) : ptr_a);
        mb_raddr[0] = MAW'(ms_en ? ptr_b + (MAW+1)'(adv_b) : ptr_b);
      end
      S_KN_FETCHQ: mb_raddr[0] = MAW'(qpos >> LWW);
      S_KN_PASS: begin
        sb_raddr[0] = SAW'(pass_row);
        sb_raddr[1] = SAW'(pass_row + 1'b1);
      end
      S_FP_FETCH: sb_raddr[0] = SAW'(sel >> LWW);
      S_FP_PASS:  sb_raddr[0] = SAW'(pass_row);
      default: ;
    endcase
  end

  always_comb begin
    s2_load = 1'b0;
    s2_lmaps = di_maps;
    s2_lcnt  = di_cnt;
    unique case (state)
      S_KM_RUN: s2_load = ms_en && ms_valid;
      S_KN_EMIT: begin
        s2_load = s2_free;
        s2_lcnt = '0;
        for (int j = 0; j < W; j++) begin
          s2_lmaps[j].p = best[j].idx;
          s2_lmaps[j].q = qidx;
          s2_lmaps[j].w = WIDX_W'(j);
          if (best[j].valid && CW'(j) < k) s2_lcnt = CW'(j + 1);
        end
      end
      S_FP_LATCH: begin
        s2_load = s2_free;
        s2_lmaps[0].p = sel;
        s2_lmaps[0].q = t_cnt;
        s2_lmaps[0].w = '0;
        s2_lcnt = CW'(1);
      end
      default: ;
    endcase
  end

  assign qpt = (state == S_KN_LATCHQ) ? mbr[LWW'(qpos)] : sbr0[lane_q];

  // row maximum from the sorter (FPS): last element of sorted half 0
  logic upd_hist;
  assign upd_hist = fps_mode && p1 && st0[W-1].valid &&
                    (!hist.valid || st0[W-1].key > hist.key);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      ptr_a <= '0; ptr_b <= '0; pass_row <= '0; qpos <= '0;
      t_cnt <= '0; sel <= '0; lane_q <= '0;
      qx <= '0; qy <= '0; qz <= '0; qidx <= '0;
      fps_mode <= 1'b0; first_pass <= 1'b0;
      p1 <= 1'b0; p2 <= 1'b0; p1_row <= '0; p1_hi_ok <= 1'b0;
      prev_last <= cmp_sentinel();
      hist <= cmp_sentinel();
      for (int i = 0; i < W; i++) begin
        best[i] <= cmp_sentinel(); bf0[i] <= cmp_sentinel(); bf1[i] <= cmp_sentinel();
      end
    end else begin
      done <= 1'b0;
      // distance pipeline: rdata (p1) -> BF (p2) -> best
      p1 <= 1'b0;
      p2 <= p1 && !fps_mode;
      if (p1) begin bf0 <= st0; bf1 <= st1; end
      if (p2) for (int i = 0; i < W; i++) best[i] <= m2[i];
      if (upd_hist) hist <= st0[W-1];
      if (s2_load && state == S_KM_RUN) prev_last <= ms_out[W-1];

      unique case (state)
        S_IDLE: if (start) begin
          unique case (op)
            OP_KMAP: begin
              state <= S_KM_PRIME; ptr_a <= '0; ptr_b <= '0;
              prev_last <= cmp_sentinel();
            end
            OP_KNN: begin state <= S_KN_FETCHQ; qpos <= '0; fps_mode <= 1'b0; end
            OP_FPS: begin
              state <= S_FP_FETCH; sel <= first; t_cnt <= '0;
              fps_mode <= 1'b1; first_pass <= 1'b1;
            end
            default: state <= S_FINISH;
          endcase
        end
        // ---------------- kernel mapping
        S_KM_PRIME: state <= S_KM_RUN;
        S_KM_RUN: begin
          if (ms_en) begin
            ptr_a <= ptr_a + (SAW+1)'(adv_a);
            ptr_b <= ptr_b + (MAW+1)'(adv_b);
          end
          if (ms_fin && !ms_valid) state <= S_FINISH;
        end
        // ---------------- k nearest neighbours / ball query
        S_KN_FETCHQ: begin
          if (qpos >= (MAW+LWW+1)'(n_out_rows) << LWW) state <= S_FINISH;
          else state <= S_KN_LATCHQ;
        end
        S_KN_LATCHQ: begin
          if (qpt.valid) begin
            qx <= qpt.x; qy <= qpt.y; qz <= qpt.z; qidx <= qpt.idx;
            pass_row <= '0;
            for (int i = 0; i < W; i++) best[i] <= cmp_sentinel();
            state <= S_KN_PASS;
          end else begin
            qpos <= qpos + 1'b1;
            state <= S_KN_FETCHQ;
          end
        end
        S_KN_PASS: begin
          p1       <= 1'b1;
          p1_hi_ok <= pass_row + 1'b1 < n_in_rows;
          pass_row <= pass_row + (SAW+1)'(2);
          if (pass_row + (SAW+1)'(2) >= n_in_rows) state <= S_KN_WAIT;
        end
        S_KN_WAIT: if (!p1 && !p2) state <= S_KN_EMIT;
        S_KN_EMIT: if (s2_free) begin
          qpos  <= qpos + 1'b1;
          state <= S_KN_FETCHQ;
        end
        // ---------------- farthest point sampling
        S_FP_FETCH: begin
          lane_q <= LWW'(sel);
          state  <= S_FP_LATCH;
        end
        S_FP_LATCH: if (s2_free) begin
          qx <= qpt.x; qy <= qpt.y; qz <= qpt.z;
          t_cnt <= t_cnt + 1'b1;
          pass_row <= '0;
          hist <= cmp_sentinel();
          if (t_cnt + 1'b1 >= n_samples) state <= S_FINISH;
          else state <= S_FP_PASS;
        end
        S_FP_PASS: begin
          p1       <= 1'b1;
          p1_row   <= SAW'(pass_row);
          pass_row <= pass_row + 1'b1;
          if (pass_row + 1'b1 >= n_in_rows) state <= S_FP_WAIT;
        end
        S_FP_WAIT: if (!p1) begin
          first_pass <= 1'b0;
          sel   <= hist.idx;
          state <= S_FP_FETCH;
        end
        S_FINISH: if (s2_pos == s2_cnt) begin
          done <= 1'b1;
          fps_mode <= 1'b0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
