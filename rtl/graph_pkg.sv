// graph_pkg: types and constants shared by the dual-module BFS engine.
//
// The engine keeps the graph in external DDR as word-addressed arrays and
// keeps its per-vertex valid-data bitmaps on chip. Indices of vertices and
// edges are 32-bit integers, as in the reference system; a DDR word is 32
// bits, so a 32-bit word address spans 16 GB. Edge-blocks are classified by
// their edge count: small (< 64 edges), middle (64 to 2048) and large
// (> 2048). Everything else here (the array numbering, the bitmap operation
// codes, the stream records) is this design's own encoding.
package graph_pkg;

  localparam int VID_W   = 32;   // vertex / edge index width (4-byte integers)
  localparam int ADDR_W  = 32;   // DDR word address
  localparam int DATA_W  = 32;   // DDR word
  localparam int DEPTH_W = 8;    // BFS depth, one byte per vertex

  // Edge-block size classes
  localparam int SMALL_LIMIT  = 64;    // small block: count <  64
  localparam int MIDDLE_LIMIT = 2048;  // middle block: 64 <= count <= 2048

  // Fixed-point format of the tuning parameters alpha, beta, gamma:
  // unsigned, FRAC_BITS fractional bits (value 256 means 1.0).
  localparam int FRAC_BITS = 8;
  localparam int TUNE_W    = 16;

  typedef logic [VID_W-1:0]  vid_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] word_t;

  // Graph arrays held in DDR. The data analyzer adds the base address of
  // the array to the element index.
  typedef enum logic [2:0] {
    ARR_OFFSET = 3'd0,  // CSR index array: first neighbour of each vertex (N+1 entries)
    ARR_NEIGH  = 3'd1,  // CSR edge array: destination of each edge
    ARR_BSTART = 3'd2,  // edge-block index array: first edge of each block
    ARR_BCOUNT = 3'd3,  // edge-block index array: number of edges of each block
    ARR_ESRC   = 3'd4,  // edge-block edge list, source vertex
    ARR_EDST   = 3'd5,  // edge-block edge list, destination vertex
    ARR_DEPTH  = 3'd6   // BFS result: depth of each vertex (low byte of a word)
  } arr_e;
  localparam int NUM_ARR = 7;

  // Memory request from a processing unit to the data analyzer
  typedef struct packed {
    arr_e  arr;
    logic  we;
    vid_t  idx;
    word_t wdata;
  } mem_req_t;

  // Request from the data analyzer to DDR
  typedef struct packed {
    logic  we;
    addr_t addr;
    word_t wdata;
  } ddr_req_t;

  // Operations of the on-chip bitmap unit
  typedef enum logic [2:0] {
    BM_CLEAR = 3'd0,  // a = word index: clear visited and both frontier words
    BM_ROOT  = 3'd1,  // b = vertex: mark visited and in the current frontier
    BM_PUSH  = 3'd2,  // b = vertex: if unvisited, mark visited and next frontier
    BM_PULL  = 3'd3,  // a = src, b = dst: as BM_PUSH, only if src is in the current frontier
    BM_SCAN  = 3'd4,  // a = word index: return words, then clear the current-frontier word
    BM_READ  = 3'd5   // a = word index: return words
  } bm_op_e;

  typedef struct packed {
    bm_op_e op;
    vid_t   a;
    vid_t   b;
  } bm_req_t;

  typedef struct packed {
    logic  updated;  // BM_PUSH / BM_PULL changed the vertex
    word_t cur;      // current-frontier word
    word_t nxt;      // next-frontier word
    word_t vis;      // visited word
  } bm_rsp_t;

  typedef enum logic [1:0] {
    GRP_SMALL  = 2'd0,
    GRP_MIDDLE = 2'd1,
    GRP_LARGE  = 2'd2
  } grp_e;

  // Edge-block descriptor carried by a pipe to a processing pipeline.
  // halt marks the end of an iteration's stream.
  typedef struct packed {
    logic halt;
    vid_t blk;
    vid_t start;
    vid_t count;
  } blk_desc_t;

  // Outcome of one processed edge-block, returned to the edge-block dispatcher
  typedef struct packed {
    vid_t blk;
    grp_e grp;
    logic active;    // some destination of the block is still unvisited
    logic accessed;  // the block updated at least one vertex this iteration
  } blk_res_t;

  // Active vertex token carried by the pipe to the vertex pipeline
  typedef struct packed {
    logic halt;
    vid_t v;
  } vtx_tok_t;

  typedef enum logic {
    MODE_LOW  = 1'b0,   // vertex-centric push (low parallel unit)
    MODE_HIGH = 1'b1    // edge-centric pull over edge-blocks (high parallel unit)
  } mode_e;

  // Run statistics exported by the top
  typedef struct packed {
    logic [31:0] iter_low;       // iterations run in the low parallel unit
    logic [31:0] iter_high;      // iterations run in the high parallel unit
    logic [31:0] ev_hub;         // low -> high switches caused by a hub
    logic [31:0] ev_alpha;       // low -> high switches caused by eq. (1)
    logic [31:0] ev_now;         // high -> low switches, eqs. (2) and (3)
    logic [31:0] ev_defer;       // eq. (2) alone: switch deferred one iteration
    logic [31:0] ev_deferred;    // deferred switches carried out
    logic [31:0] vp_vertices;    // vertices processed by the vertex pipeline
    logic [31:0] vp_loops;       // thread-group loops of the vertex pipeline
    logic [31:0] vp_updates;     // vertices claimed by pushes
    logic [31:0] vp_multi;       // vertices whose degree needed several loops
    logic [31:0] vpipe_full;     // cycles the active-vertex pipe was full
    logic [2:0][31:0] blk_disp;  // blocks dispatched per group (last high iteration)
    logic [2:0][31:0] blk_loops; // loops per group pipeline (whole run)
    logic [2:0][31:0] blk_edges; // edges pulled per group pipeline
    logic [2:0][31:0] blk_upd;   // vertices claimed by pulls per group
    logic [2:0][31:0] blk_halts; // halt descriptors received per group
    logic [2:0][31:0] bpipe_full;// cycles each block pipe was full
  } engine_stats_t;

  function automatic grp_e classify(input vid_t count);
    if (count < SMALL_LIMIT)        return GRP_SMALL;
    else if (count <= MIDDLE_LIMIT) return GRP_MIDDLE;
    else                            return GRP_LARGE;
  endfunction

endpackage
