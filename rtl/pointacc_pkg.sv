// Shared types and constants of the point cloud accelerator.
//
// The mapping unit compares "comparator structs": a sort key plus a payload.
// For kernel mapping the key is a point's coordinates packed so that an
// unsigned compare orders points lexicographically (x, then y, then z); for
// the distance based operations (k-nearest-neighbours, ball query, farthest
// point sampling) the key is a squared distance. The payload is the point
// index and a flag telling which cloud the element came from.
//
// Widths are this design's choice: the paper gives none. Coordinates are
// 16-bit signed, point indices 17 bits (up to 131072 points, the paper's
// clouds hold 10^3..10^5 points), weight indices 5 bits (27 kernel offsets
// of a 3x3x3 kernel), features and weights 8-bit signed, psums 32 bits.
package pointacc_pkg;

  localparam int COORD_W = 16;
  localparam int KEY_W   = 3 * COORD_W;   // 48-bit key
  localparam int IDX_W   = 17;
  localparam int WIDX_W  = 5;
  localparam int DIST_W  = KEY_W;         // squared distances fit in 36 bits
  localparam int FEAT_W  = 8;
  localparam int PSUM_W  = 32;

  localparam logic [KEY_W-1:0] KEY_MAX = '1;   // sentinel / invalid key

  typedef logic signed [COORD_W-1:0] coord_t;

  // A point as stored in the sorter and merger buffers.
  typedef struct packed {
    logic              valid;
    coord_t            x;
    coord_t            y;
    coord_t            z;
    logic [IDX_W-1:0]  idx;
    logic [DIST_W-1:0] mind;   // distance to the sampled set (FPS)
  } point_t;

  // Comparator struct: key + payload.
  typedef struct packed {
    logic [KEY_W-1:0] key;
    logic             valid;
    logic             src;     // 1: input cloud, 0: output cloud
    logic [IDX_W-1:0] idx;
  } cmp_t;

  // A map: input point p contributes to output point q through weight w.
  typedef struct packed {
    logic [IDX_W-1:0]  p;
    logic [IDX_W-1:0]  q;
    logic [WIDX_W-1:0] w;
  } map_t;

  // Memory Meta Info Register: describes one memory tile of a buffer.
  // Fields as printed for the MIR (tile id, capacity, offset, occupancy,
  // tail pointer); widths are this design's choice. In cache mode tile_id is
  // the tag: {channel tile, index of the first point of the block}.
  localparam int TILEID_W = IDX_W + 4;
  localparam int MIRF_W   = 16;
  typedef struct packed {
    logic                valid;
    logic [TILEID_W-1:0] tile_id;
    logic [MIRF_W-1:0]   capacity;   // rows allocated to the tile
    logic [MIRF_W-1:0]   offset;     // first buffer row of the tile
    logic [MIRF_W-1:0]   occupancy;  // rows filled (or still unused)
    logic [MIRF_W-1:0]   tail;       // next row to be written
  } mir_t;

  typedef enum logic [1:0] {
    MIR_TAG   = 2'd0,   // direct-mapped tag array (cache for sparse layers)
    MIR_FIFO  = 2'd1,   // FIFO of tiles (prefetching dense layers)
    MIR_STACK = 2'd2    // stack of tiles (temporal layer fusion)
  } mir_mode_e;

  // Mapping unit operations.
  typedef enum logic [1:0] {
    OP_KMAP = 2'd0,   // kernel mapping for one offset
    OP_KNN  = 2'd1,   // k nearest neighbours / ball query for one query point
    OP_FPS  = 2'd2    // farthest point sampling of M points
  } mpu_op_e;

  // Key of a coordinate triple: sign bits flipped so unsigned order equals
  // signed lexicographic order.
  function automatic logic [KEY_W-1:0] coord_key(coord_t x, coord_t y, coord_t z);
    return {~x[COORD_W-1], x[COORD_W-2:0], ~y[COORD_W-1], y[COORD_W-2:0],
            ~z[COORD_W-1], z[COORD_W-2:0]};
  endfunction

  // Sentinel element, larger than every real element.
  function automatic cmp_t cmp_sentinel();
    cmp_t c;
    c.key = KEY_MAX; c.valid = 1'b0; c.src = 1'b0; c.idx = '0;
    return c;
  endfunction

endpackage
