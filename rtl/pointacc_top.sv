// Point cloud accelerator top: mapping unit, map FIFO, memory management
// unit and matrix unit.
//
// Data flow: the host loads the input cloud into the sorter buffer, the
// output cloud into the merger buffer and the weights into the weight
// buffer, then starts mapping operations on the mapping unit (MPU). Each
// produces maps (input point, output point, weight) into the map FIFO. With
// maps_to_host low the memory management unit (MMU) consumes them: it
// fetches input features from DRAM on demand through its cache, drives the
// weight-stationary matrix unit (MXU) and accumulates the results in the
// output buffer, which it writes to DRAM at the end. With maps_to_host high
// the maps leave through map_out instead (e.g. to be stored in DRAM, as for
// the FPS and neighbour search results of PointNet++-style layers).
// maps_last tells the MMU that no further mapping command will be started;
// it ends its sparse pass when the MPU is idle and the FIFO is empty.
// Dense (FC) layers run on the MMU alone (mmu_dense).
//
// DRAM (off chip, HBM2 in the paper's main configuration) is reached through
// the rd_req/rd_resp/wr ports; one DRAM row is one point's features (read)
// or one point's output partial sums (write). The event outputs pulse once
// per occurrence of each mechanism and exist for observation.
// Default sizes follow the paper's main configuration where it gives them
// (64x64 array); buffer sizes are chosen to total about 776 KB.
module pointacc_top
  import pointacc_pkg::*;
#(
  parameter int N        = 64,
  parameter int SB_ROWS  = 128,
  parameter int MB_ROWS  = 128,
  parameter int FIFO_D   = 64,
  parameter int ROWS     = 64,
  parameter int COLS     = 64,
  parameter int IB_ROWS  = 4096,
  parameter int OB_ROWS  = 1024,
  parameter int NW       = 27,
  parameter int NMIR     = 64,
  parameter int DAW      = 32,
  localparam int W   = N / 2,
  localparam int SAW = $clog2(SB_ROWS),
  localparam int MAW = $clog2(MB_ROWS),
  localparam int CW  = $clog2(W + 1),
  localparam int OAW = $clog2(OB_ROWS),
  localparam int WAW = $clog2(NW * ROWS),
  localparam int FW  = ROWS * FEAT_W,
  localparam int PWD = COLS * PSUM_W,
  localparam int WW  = COLS * FEAT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // buffer fill
  input  logic              sb_we,
  input  logic [SAW-1:0]    sb_waddr,
  input  point_t            sb_wdata [W],
  input  logic              mb_we,
  input  logic [MAW-1:0]    mb_waddr,
  input  point_t            mb_wdata [W],
  input  logic              wb_we,
  input  logic [WAW-1:0]    wb_waddr,
  input  logic [WW-1:0]     wb_wdata,
  // mapping unit command
  input  logic              mpu_start,
  input  mpu_op_e           mpu_op,
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
  output logic              mpu_busy,
  output logic              mpu_done,
  // MMU command
  input  logic              mmu_start,
  input  logic              mmu_dense,
  input  logic [2:0]        log_bs,
  input  logic [3:0]        ctile,
  input  logic [DAW-1:0]    feat_base,
  input  logic [DAW-1:0]    out_base,
  input  logic [OAW:0]      n_out,
  input  logic [OAW:0]      n_points,
  input  logic [WIDX_W-1:0] dense_w,
  input  logic              maps_last,
  input  logic              maps_to_host,
  output logic              mmu_busy,
  output logic              mmu_done,
  // maps to host / DRAM
  output logic              map_out_valid,
  input  logic              map_out_ready,
  output map_t              map_out,
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
  // events
  output logic              ev_mpu_stall,
  output logic              ev_fifo_full,
  output logic              ev_hit,
  output logic              ev_miss,
  output logic              ev_wload,
  output logic              ev_prefetch,
  output logic              ev_release
);
  localparam int RW  = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int LAT = ROWS + COLS - 1;

  // ---------------------------------------------------------------- MPU
  logic mpu_map_valid, mpu_map_ready;
  map_t mpu_map;

  mapping_unit #(.N(N), .SB_ROWS(SB_ROWS), .MB_ROWS(MB_ROWS)) u_mpu (
    .clk, .rst_n,
    .sb_we, .sb_waddr, .sb_wdata, .mb_we, .mb_waddr, .mb_wdata,
    .start(mpu_start), .op(mpu_op), .n_in_rows, .n_out_rows,
    .off_x, .off_y, .off_z, .widx, .k, .ball, .r2, .n_samples, .first,
    .busy(mpu_busy), .done(mpu_done),
    .map_valid(mpu_map_valid), .map_ready(mpu_map_ready), .map_data(mpu_map),
    .stall(ev_mpu_stall));

  // ---------------------------------------------------------------- Map FIFO
  logic fifo_valid, fifo_ready;
  map_t fifo_map;
  logic [$clog2(FIFO_D+1)-1:0] fifo_level;

  map_fifo #(.DEPTH(FIFO_D)) u_map_fifo (
    .clk, .rst_n,
    .push_valid(mpu_map_valid), .push_ready(mpu_map_ready), .push_data(mpu_map),
    .pop_valid(fifo_valid), .pop_ready(fifo_ready), .pop_data(fifo_map),
    .level(fifo_level));

  assign ev_fifo_full = mpu_map_valid && !mpu_map_ready;

  logic mmu_map_ready;
  assign map_out_valid = maps_to_host && fifo_valid;
  assign map_out       = fifo_map;
  assign fifo_ready    = maps_to_host ? map_out_ready : mmu_map_ready;

  // ---------------------------------------------------------------- MMU
  logic                     mx_w_we, mx_in_valid, mx_out_valid;
  logic [RW-1:0]            mx_w_row;
  logic signed [FEAT_W-1:0] mx_w_data [COLS];
  logic signed [FEAT_W-1:0] mx_in_vec [ROWS];
  logic signed [PSUM_W-1:0] mx_out_vec [COLS];
  logic [IDX_W-1:0]         mx_in_tag, mx_out_tag;
  logic [$clog2(LAT+2)-1:0] mx_in_flight;
  logic                     maps_end;

  assign maps_end = maps_last && !mpu_busy && !mpu_start && !fifo_valid;

  memory_management_unit #(
    .ROWS(ROWS), .COLS(COLS), .IB_ROWS(IB_ROWS), .OB_ROWS(OB_ROWS),
    .NW(NW), .NMIR(NMIR), .DAW(DAW)
  ) u_mmu (
    .clk, .rst_n,
    .start(mmu_start), .dense(mmu_dense), .log_bs, .ctile, .feat_base, .out_base,
    .n_out, .n_points, .dense_w, .busy(mmu_busy), .done(mmu_done),
    .wb_we, .wb_waddr, .wb_wdata,
    .map_valid(fifo_valid && !maps_to_host), .map_ready(mmu_map_ready),
    .map_data(fifo_map), .maps_end,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .rd_resp_valid, .rd_resp_data, .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .mx_w_we, .mx_w_row, .mx_w_data, .mx_in_valid, .mx_in_vec, .mx_in_tag,
    .mx_out_valid, .mx_out_vec, .mx_out_tag, .mx_in_flight,
    .ev_hit, .ev_miss, .ev_wload, .ev_prefetch, .ev_release);

  // ---------------------------------------------------------------- MXU
  matrix_unit #(.ROWS(ROWS), .COLS(COLS), .TAG_W(IDX_W)) u_mxu (
    .clk, .rst_n,
    .w_we(mx_w_we), .w_row(mx_w_row), .w_data(mx_w_data),
    .in_valid(mx_in_valid), .in_vec(mx_in_vec), .in_tag(mx_in_tag),
    .out_valid(mx_out_valid), .out_vec(mx_out_vec), .out_tag(mx_out_tag),
    .in_flight(mx_in_flight));
endmodule
