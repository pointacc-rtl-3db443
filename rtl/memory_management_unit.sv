// Memory management unit (MMU): feeds the matrix unit from the maps.
//
// Owns the input feature buffer, the output feature buffer and the weight
// buffer, and the MIR container that describes the input buffer's tiles.
// A buffer row is one point: ROWS 8-bit input channels in the input buffer,
// COLS 32-bit partial sums in the output buffer; weight row w*ROWS+i holds
// input channel i of weight matrix w.
//
// Sparse mode (fetch-on-demand, point cloud convolution). Maps arrive
// grouped by weight. For each map (p, q, w):
//  1. if w is not the matrix held in the array, wait until the matrix unit
//     is empty and load matrix w (ROWS cycles): weight stationary inner loop;
//  2. look p up in the input buffer, configured as a direct-mapped cache whose
//     block is 2^log_bs consecutive points; the MIR container is the tag array
//     and a tag is {channel tile, first point of the block}. On a miss the
//     whole block is read from DRAM (one request, 2^log_bs rows) into the
//     block's line and the MIR is written;
//  3. read p's features and send them to the matrix unit tagged with q.
// Results are added into output buffer row q (read-modify-write, one point
// per cycle). Outputs stay on chip until all maps are done (output
// stationary) and are then written to DRAM rows out_base + q, q < n_out.
//
// Dense mode (FC layer / 1x1 convolution over n_points contiguous points):
// the input buffer holds two tiles of 2^log_bs points, managed as a MIR FIFO.
// At the start of each tile the MIR of the next tile is pushed and its DRAM
// read issued (prefetch); when a tile is finished its MIR is popped
// (released). Point p's result goes to output row p.
//
// Timing: maps are accepted at most one per cycle (map_ready). DRAM reads are
// a request (address, length in rows) followed by length response rows in
// order; DRAM writes are one row per accepted wr_valid. done pulses when the
// last output row has been written.
// Following the paper: fetch-on-demand flow, input buffer as a direct-mapped
// cache with software block size and the MIR container as its tag array,
// weight-stationary inner / output-stationary outer loops, prefetch of the
// next dense tile. This design's own: all sizes and interfaces, one miss at
// a time, clearing the output buffer at the start. Temporal layer fusion
// (MIR container as a stack) is not implemented here.
module memory_management_unit
  import pointacc_pkg::*;
#(
  parameter int ROWS    = 64,
  parameter int COLS    = 64,
  parameter int IB_ROWS = 4096,    // 256 KB input feature buffer
  parameter int OB_ROWS = 1024,    // 256 KB output feature buffer
  parameter int NW      = 27,      // weight matrices held (3x3x3 kernel)
  parameter int NMIR    = 64,
  parameter int DAW     = 32,      // DRAM row address width
  localparam int IAW = $clog2(IB_ROWS),
  localparam int OAW = $clog2(OB_ROWS),
  localparam int WAW = $clog2(NW * ROWS),
  localparam int RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int MW  = $clog2(NMIR),
  localparam int FW  = ROWS * FEAT_W,
  localparam int PWD = COLS * PSUM_W,
  localparam int WW  = COLS * FEAT_W,
  localparam int LAT = ROWS + COLS - 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration, static while busy
  input  logic              start,
  input  logic              dense,
  input  logic [2:0]        log_bs,
  input  logic [3:0]        ctile,
  input  logic [DAW-1:0]    feat_base,
  input  logic [DAW-1:0]    out_base,
  input  logic [OAW:0]      n_out,       // sparse: output points
  input  logic [OAW:0]      n_points,    // dense: points
  input  logic [WIDX_W-1:0] dense_w,
  output logic              busy,
  output logic              done,
  // weight buffer fill
  input  logic              wb_we,
  input  logic [WAW-1:0]    wb_waddr,
  input  logic [WW-1:0]     wb_wdata,
  // maps
  input  logic              map_valid,
  output logic              map_ready,
  input  map_t              map_data,
  input  logic              maps_end,    // no more maps will arrive
  // DRAM
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [DAW-1:0]    rd_req_addr,
  output logic [8:0]        rd_req_len,
  input  logic              rd_resp_valid,
  input  logic [FW-1:0]     rd_resp_data,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [DAW-1:0]    wr_addr,
  output logic [PWD-1:0]    wr_data,
  // matrix unit
  output logic              mx_w_we,
  output logic [RW-1:0]     mx_w_row,
  output logic signed [FEAT_W-1:0] mx_w_data [COLS],
  output logic              mx_in_valid,
  output logic signed [FEAT_W-1:0] mx_in_vec [ROWS],
  output logic [IDX_W-1:0]  mx_in_tag,
  input  logic              mx_out_valid,
  input  logic signed [PSUM_W-1:0] mx_out_vec [COLS],
  input  logic [IDX_W-1:0]  mx_out_tag,
  input  logic [$clog2(LAT+2)-1:0] mx_in_flight,
  // events
  output logic              ev_hit,
  output logic              ev_miss,
  output logic              ev_wload,
  output logic              ev_prefetch,
  output logic              ev_release
);
  typedef enum logic [3:0] {
    M_IDLE, M_CLR, M_MAP, M_DRAIN_W, M_WLOAD, M_MISS_REQ, M_MISS_FILL,
    M_D_TILE, M_D_RUN, M_DRAIN_END, M_WB_RD, M_WB_WR
  } mstate_e;
  mstate_e state, wl_ret;

  // ------------------------------------------------------------ buffers
  logic           ib_we, ib_ren [1];
  logic [IAW-1:0] ib_waddr, ib_raddr [1];
  logic [FW-1:0]  ib_rdata [1];
  logic           ob_we, ob_ren [1];
  logic [OAW-1:0] ob_waddr, ob_raddr [1];
  logic [PWD-1:0] ob_wdata, ob_rdata [1];
  logic           wb_ren [1];
  logic [WAW-1:0] wb_raddr [1];
  logic [WW-1:0]  wb_rdata [1];

  buffer_ram #(.DEPTH(IB_ROWS), .DW(FW), .NR(1)) u_input_buffer (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(rd_resp_data),
    .ren(ib_ren), .raddr(ib_raddr), .rdata(ib_rdata));
  buffer_ram #(.DEPTH(OB_ROWS), .DW(PWD), .NR(1)) u_output_buffer (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .ren(ob_ren), .raddr(ob_raddr), .rdata(ob_rdata));
  buffer_ram #(.DEPTH(NW * ROWS), .DW(WW), .NR(1)) u_weight_buffer (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata),
    .ren(wb_ren), .raddr(wb_raddr), .rdata(wb_rdata));

  // ------------------------------------------------------------ MIR container
  mir_mode_e           mir_mode;
  logic                mir_clear, mir_hit, mir_wr, mir_push, mir_pop;
  logic [MW-1:0]       mir_idx;
  logic [TILEID_W-1:0] mir_tag;
  mir_t                mir_lk, mir_wmir, mir_head;
  logic [$clog2(NMIR+1)-1:0] mir_count;
  logic                mir_full, mir_empty;

  mir_container #(.ENTRIES(NMIR)) u_mir (
    .clk, .rst_n, .mode(mir_mode), .clear(mir_clear),
    .lookup_idx(mir_idx), .lookup_tag(mir_tag), .lookup_hit(mir_hit),
    .lookup_mir(mir_lk), .wr_en(mir_wr), .wr_idx(mir_idx), .wr_mir(mir_wmir),
    .push(mir_push), .push_mir(mir_wmir), .pop(mir_pop),
    .upd_en(1'b0), .upd_mir(mir_wmir), .head_mir(mir_head),
    .count(mir_count), .full(mir_full), .empty(mir_empty));

  // ------------------------------------------------------------ address generator
  logic [IDX_W-1:0] blk;            // block number of p
  logic [IDX_W-1:0] lines_mask;     // cache lines in use - 1
  logic [IAW:0]     bsz;            // block size in rows
  logic [IAW-1:0]   line_off, ib_hit_addr;

  always_comb begin
    bsz        = (IAW+1)'(1) << log_bs;
    blk        = map_data.p >> log_bs;
    lines_mask = IDX_W'((IB_ROWS >> log_bs) > NMIR ? NMIR : (IB_ROWS >> log_bs)) - 1'b1;
    mir_idx    = MW'(blk & lines_mask);
    mir_tag    = {ctile, blk};
    line_off   = IAW'(IAW'(mir_idx) << log_bs);
    ib_hit_addr = IAW'(mir_lk.offset) + IAW'(map_data.p & IDX_W'(bsz - 1'b1));
  end

  // ------------------------------------------------------------ state
  logic [WIDX_W-1:0] cur_w;
  logic              w_loaded;
  logic [RW:0]       wl_cnt;
  logic              wl_v;
  logic [RW-1:0]     wl_row;
  logic [IAW:0]      fill_cnt;
  logic [IAW-1:0]    fill_base;
  logic              filling;
  logic [OAW:0]      row_cnt;
  logic              iss_v;
  logic [IDX_W-1:0]  iss_tag;
  logic              acc_v;
  logic [OAW-1:0]    acc_row;
  logic signed [PSUM_W-1:0] acc_vec [COLS];
  logic              fwd_q;          // row read last cycle was being written
  logic [PWD-1:0]    last_wdata, ob_old;
  logic [OAW:0]      d_tile, d_filled, d_ntiles;
  logic [IAW:0]      d_in_tile;
  logic [OAW:0]      d_req;
  logic              need_w, pipe_empty;

  assign busy       = state != M_IDLE;
  assign need_w     = !w_loaded || map_data.w != cur_w;
  assign pipe_empty = mx_in_flight == '0 && !iss_v && !acc_v && !mx_out_valid;
  assign d_ntiles   = (n_points + (OAW+1)'(bsz) - 1'b1) >> log_bs;

  // matrix unit feed
  assign mx_in_valid = iss_v;
  assign mx_in_tag   = iss_tag;
  assign mx_w_we     = wl_v;
  assign mx_w_row    = wl_row;
  always_comb begin
    for (int i = 0; i < ROWS; i++) mx_in_vec[i] = ib_rdata[0][i*FEAT_W +: FEAT_W];
    for (int j = 0; j < COLS; j++) mx_w_data[j] = wb_rdata[0][j*FEAT_W +: FEAT_W];
  end

  always_comb begin
    map_ready   = 1'b0;
    ib_ren[0]   = 1'b0; ib_raddr[0] = ib_hit_addr;
    ib_we       = filling && rd_resp_valid;
    ib_waddr    = fill_base + IAW'(fill_cnt);
    wb_ren[0]   = 1'b0; wb_raddr[0] = WAW'(cur_w) * WAW'(ROWS) + WAW'(wl_cnt);
    ob_ren[0]   = 1'b0; ob_raddr[0] = OAW'(mx_out_tag);
    ob_we       = 1'b0; ob_waddr = acc_row;
    ob_old      = fwd_q ? last_wdata : ob_rdata[0];
    for (int j = 0; j < COLS; j++)
      ob_wdata[j*PSUM_W +: PSUM_W] = ob_old[j*PSUM_W +: PSUM_W] + acc_vec[j];
    rd_req_valid = 1'b0; rd_req_addr = '0; rd_req_len = '0;
    mir_mode  = dense ? MIR_FIFO : MIR_TAG;
    mir_clear = (state == M_IDLE) && start;
    mir_wr    = 1'b0; mir_push = 1'b0; mir_pop = 1'b0;
    mir_wmir.valid     = 1'b1;
    mir_wmir.tile_id   = mir_tag;
    mir_wmir.capacity  = MIRF_W'(bsz);
    mir_wmir.offset    = MIRF_W'(line_off);
    mir_wmir.occupancy = MIRF_W'(bsz);
    mir_wmir.tail      = MIRF_W'(bsz);
    ev_hit = 1'b0; ev_miss = 1'b0; ev_prefetch = 1'b0; ev_release = 1'b0;
    ev_wload = (state == M_WLOAD) && wl_cnt == '0;

    if (mx_out_valid) ob_ren[0] = 1'b1;
    if (acc_v)        ob_we = 1'b1;

    unique case (state)
      M_CLR: begin
        ob_we = 1'b1; ob_waddr = OAW'(row_cnt); ob_wdata = '0;
      end
      M_MAP: begin
        if (map_valid && !need_w) begin
          if (mir_hit) begin
            map_ready = 1'b1; ib_ren[0] = 1'b1; ev_hit = 1'b1;
          end
        end
      end
      M_WLOAD: wb_ren[0] = 1'b1;
      M_MISS_REQ: begin
        rd_req_valid = 1'b1;
        rd_req_addr  = feat_base + DAW'(blk << log_bs);
        rd_req_len   = 9'(bsz);
        ev_miss      = rd_req_ready;
      end
      M_MISS_FILL: begin
        mir_wr = filling && rd_resp_valid && fill_cnt + 1'b1 == bsz;
      end
      M_D_TILE: begin
        // start of a computation tile: fetch tile 0, or prefetch the next
        // tile once the current one is on chip
        if (d_req == '0) begin
          rd_req_valid = 1'b1;
          rd_req_addr  = feat_base;
          mir_wmir.tile_id = '0;
          mir_wmir.offset  = '0;
        end else if (d_filled > d_tile && d_req == d_tile + 1'b1 &&
                     d_tile + 1'b1 < d_ntiles) begin
          rd_req_valid = 1'b1;
          rd_req_addr  = feat_base + DAW'(IDX_W'(d_tile + 1'b1) << log_bs);
          mir_wmir.tile_id = TILEID_W'(d_tile + 1'b1);
          mir_wmir.offset  = MIRF_W'(d_tile[0] ? 0 : bsz);
          ev_prefetch  = rd_req_ready;
        end
        rd_req_len = 9'(bsz);
        mir_push   = rd_req_valid && rd_req_ready;
      end
      M_D_RUN: begin
        ib_ren[0]   = 1'b1;
        ib_raddr[0] = IAW'(mir_head.offset) + IAW'(d_in_tile);
        mir_pop     = d_in_tile + 1'b1 == bsz ||
                      ((IDX_W'(d_tile) << log_bs) + IDX_W'(d_in_tile) + 1'b1 >= IDX_W'(n_points));
        ev_release  = mir_pop;
      end
      M_WB_RD: begin
        ob_ren[0] = 1'b1; ob_raddr[0] = OAW'(row_cnt);
      end
      default: ;
    endcase
  end

  assign wr_valid = (state == M_WB_WR);
  assign wr_addr  = out_base + DAW'(row_cnt);
  assign wr_data  = ob_rdata[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_IDLE; wl_ret <= M_IDLE; done <= 1'b0;
      cur_w <= '0; w_loaded <= 1'b0; wl_cnt <= '0; wl_v <= 1'b0; wl_row <= '0;
      fill_cnt <= '0; fill_base <= '0; filling <= 1'b0;
      row_cnt <= '0; iss_v <= 1'b0; iss_tag <= '0;
      acc_v <= 1'b0; acc_row <= '0; fwd_q <= 1'b0; last_wdata <= '0;
      for (int j = 0; j < COLS; j++) acc_vec[j] <= '0;
      d_tile <= '0; d_filled <= '0; d_req <= '0; d_in_tile <= '0;
    end else begin
      done  <= 1'b0;
      iss_v <= 1'b0;
      wl_v  <= 1'b0;
      // accumulate stage
      acc_v   <= mx_out_valid;
      fwd_q   <= mx_out_valid && acc_v && acc_row == OAW'(mx_out_tag);
      last_wdata <= ob_wdata;
      acc_row <= OAW'(mx_out_tag);
      acc_vec <= mx_out_vec;
      // fills (miss or dense prefetch)
      if (filling && rd_resp_valid) begin
        fill_cnt <= fill_cnt + 1'b1;
        if (fill_cnt + 1'b1 == bsz) begin
          filling  <= 1'b0;
          d_filled <= d_filled + 1'b1;
        end
      end

      unique case (state)
        M_IDLE: if (start) begin
          row_cnt <= '0;
          state   <= M_CLR;
          w_loaded <= 1'b0;
          d_tile <= '0; d_filled <= '0; d_req <= '0; d_in_tile <= '0;
        end
        M_CLR: begin
          row_cnt <= row_cnt + 1'b1;
          if (row_cnt + 1'b1 >= (dense ? n_points : n_out)) begin
            if (dense) begin
              cur_w  <= dense_w; wl_cnt <= '0;
              wl_ret <= M_D_TILE; state <= M_WLOAD;
            end else begin
              state <= M_MAP;
            end
          end
        end
        M_MAP: begin
          if (map_valid) begin
            if (need_w) begin
              state <= M_DRAIN_W;
            end else if (mir_hit) begin
              iss_v   <= 1'b1;
              iss_tag <= map_data.q;
            end else begin
              state <= M_MISS_REQ;
            end
          end else if (maps_end) begin
            state <= M_DRAIN_END;
          end
        end
        M_DRAIN_W: if (pipe_empty) begin
          cur_w  <= map_data.w;
          wl_cnt <= '0;
          wl_ret <= M_MAP;
          state  <= M_WLOAD;
        end
        M_WLOAD: begin
          // read row wl_cnt, write it into the array one cycle later
          wl_cnt <= wl_cnt + 1'b1;
          wl_v   <= 1'b1;
          wl_row <= RW'(wl_cnt);
          if (wl_cnt == (RW+1)'(ROWS - 1)) begin
            w_loaded <= 1'b1;
            state    <= wl_ret;
          end
        end
        M_MISS_REQ: if (rd_req_ready) begin
          filling   <= 1'b1;
          fill_cnt  <= '0;
          fill_base <= line_off;
          state     <= M_MISS_FILL;
        end
        M_MISS_FILL: if (!filling || (rd_resp_valid && fill_cnt + 1'b1 == bsz)) state <= M_MAP;
        M_D_TILE: begin
          if (rd_req_valid && rd_req_ready) begin
            filling   <= 1'b1;
            fill_cnt  <= '0;
            fill_base <= IAW'(mir_wmir.offset);
            d_req     <= d_req + 1'b1;
          end
          if (d_filled > d_tile && !(rd_req_valid && !rd_req_ready)) begin
            d_in_tile <= '0;
            state     <= M_D_RUN;
          end
        end
        M_D_RUN: begin
          iss_v     <= 1'b1;
          iss_tag   <= (IDX_W'(d_tile) << log_bs) + IDX_W'(d_in_tile);
          d_in_tile <= d_in_tile + 1'b1;
          if (mir_pop) begin
            d_tile <= d_tile + 1'b1;
            state  <= (d_tile + 1'b1 >= d_ntiles) ? M_DRAIN_END : M_D_TILE;
          end
        end
        M_DRAIN_END: if (pipe_empty) begin
          row_cnt <= '0;
          state   <= M_WB_RD;
        end
        M_WB_RD: state <= M_WB_WR;
        M_WB_WR: if (wr_ready) begin
          row_cnt <= row_cnt + 1'b1;
          if (row_cnt + 1'b1 >= (dense ? n_points : n_out)) begin
            done  <= 1'b1;
            state <= M_IDLE;
          end else begin
            state <= M_WB_RD;
          end
        end
        default: state <= M_IDLE;
      endcase
    end
  end
endmodule
