// graph_engine_top: dual-module BFS engine with a run-time dispatcher.
//
// The engine processes a graph stored in DDR with two processing modules on
// one chip and switches between them every iteration:
//   * the low parallel unit (vertex_pipeline) pushes from the few active
//     vertices along their CSR neighbour lists;
//   * the high parallel unit (high_parallel_unit) pulls over edge-blocks,
//     sorted by size into small, middle and large pipelines fed through pipes.
// The processing dispatcher, with its state analyzer and switch rule, runs
// the iterations and picks the module; the bitmap unit holds the visited and
// frontier bits on chip; the data analyzer is the only path to DDR.
//
// Interface:
//   start / busy / done  one BFS run from root over num_vertices vertices
//                        and num_blocks edge-blocks of VPB destinations
//   base_addr[a]         DDR word address of graph array a (graph_pkg::arr_e),
//                        laid out by the host before start
//   alpha, beta, gamma   switch thresholds, unsigned with 8 fractional bits
//   hub_degree           out-degree from which an active vertex is a hub (0: off)
//   start_high           begin in the high unit (whole graph active)
//   ddr_*                word-wide DDR port; reads must be answered in order
//   mode, level, stats   progress and counters
// The result is the DEPTH array in DDR: root gets 0, a vertex at distance d
// gets d; vertices never reached keep what the host stored there.
//
// Client numbering. Data analyzer: 0 dispatcher, 1 vertex pipeline,
// 2 edge-block dispatcher, 3..5 small/middle/large pipeline. Bitmap unit:
// 0 dispatcher, 1 state analyzer, 2 vertex pipeline, 3..5 small/middle/large.
//
// The composition follows the reference system's block diagram (data
// analyzer, dispatcher with state analyzer and processing dispatcher, low
// parallel unit with vertex pipeline and CSR array, high parallel unit with
// edge-block dispatcher, block groups and three pipelines). Its defaults:
// 32-bit vertex and edge indices, 16-thread vertex groups, 16/64/256-thread
// block pipelines, 8 destination vertices per block. MAX_V = 2^23 (room for
// the largest evaluated graph, 4.85 M vertices) and the pipe depths are this
// design's own choice.
module graph_engine_top
  import graph_pkg::*;
#(
  parameter int MAX_V          = 1 << 23,
  parameter int VPB            = 8,
  parameter int MAX_BLOCKS     = MAX_V / VPB,
  parameter int VERTEX_THREADS = 16,
  parameter int SMALL_THREADS  = 16,
  parameter int MIDDLE_THREADS = 64,
  parameter int LARGE_THREADS  = 256,
  parameter int PIPE_DEPTH     = 16,
  parameter int OUTSTANDING    = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  // run control
  input  logic     start,
  input  vid_t     root,
  input  vid_t     num_vertices,
  input  vid_t     num_blocks,
  input  logic     start_high,
  input  logic [TUNE_W-1:0] alpha,
  input  logic [TUNE_W-1:0] beta,
  input  logic [TUNE_W-1:0] gamma,
  input  vid_t     hub_degree,
  input  addr_t    base_addr [NUM_ARR],
  output logic     busy,
  output logic     done,
  output mode_e    mode,
  output logic [DEPTH_W-1:0] level,
  // DDR
  output logic     ddr_req_valid,
  input  logic     ddr_req_ready,
  output ddr_req_t ddr_req,
  input  logic     ddr_rsp_valid,
  input  word_t    ddr_rsp_data,
  // statistics
  output engine_stats_t stats,
  output logic [31:0]   acc_count [NUM_ARR]
);
  // data analyzer clients
  logic     [5:0] m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req [6];
  word_t    m_rsp_data;
  // bitmap clients
  logic     [5:0] b_valid, b_ready, b_rsp_valid;
  bm_req_t  b_req [6];
  bm_rsp_t  b_rsp;
  logic     bm_swap, bank;

  // control
  logic     iter_start, vp_done, hub_seen;
  logic     hp_init, hp_start, hp_busy, hp_done;
  logic     sa_start, sa_done;
  vid_t     na_v, ni_v, na_b, nb, fl, nl;
  logic     vtx_valid, vtx_ready, vq_valid, vq_ready;
  vtx_tok_t vtx_tok, vq_tok;

  // statistics wires
  logic [31:0] vp_edges;
  vid_t        n_disp [3];
  logic [31:0] g_loops [3], g_edges [3], g_upd [3], g_halts [3], g_full [3];

  data_analyzer #(.NCLI(6), .OUTSTANDING(OUTSTANDING)) u_da (
    .clk, .rst_n, .base_addr,
    .req_valid(m_valid), .req_ready(m_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data),
    .ddr_req_valid, .ddr_req_ready, .ddr_req, .ddr_rsp_valid, .ddr_rsp_data,
    .acc_count
  );

  bitmap_unit #(.MAX_V(MAX_V), .NCLI(6)) u_bm (
    .clk, .rst_n, .swap(bm_swap),
    .req_valid(b_valid), .req_ready(b_ready), .req(b_req),
    .rsp_valid(b_rsp_valid), .rsp(b_rsp), .sel_bank(bank)
  );

  processing_dispatcher u_disp (
    .clk, .rst_n, .start, .root, .num_vertices, .start_high, .alpha, .beta, .gamma,
    .busy, .done, .mode, .level,
    .bm_valid(b_valid[0]), .bm_ready(b_ready[0]), .bm_req(b_req[0]),
    .bm_rsp_valid(b_rsp_valid[0]), .bm_rsp(b_rsp), .bm_swap,
    .mem_valid(m_valid[0]), .mem_ready(m_ready[0]), .mem_req(m_req[0]),
    .iter_start, .vtx_valid, .vtx_ready, .vtx_tok, .vp_done, .hub_seen,
    .hp_init, .hp_start, .hp_busy, .hp_done, .na_b, .nb, .fl, .nl,
    .sa_start, .sa_done, .na_v, .ni_v,
    .n_iter_low(stats.iter_low), .n_iter_high(stats.iter_high),
    .n_ev_hub(stats.ev_hub), .n_ev_alpha(stats.ev_alpha), .n_ev_now(stats.ev_now),
    .n_ev_defer(stats.ev_defer), .n_ev_deferred(stats.ev_deferred)
  );

  state_analyzer u_sa (
    .clk, .rst_n, .start(sa_start), .num_vertices, .done(sa_done), .na(na_v), .ni(ni_v),
    .bm_valid(b_valid[1]), .bm_ready(b_ready[1]), .bm_req(b_req[1]),
    .bm_rsp_valid(b_rsp_valid[1]), .bm_rsp(b_rsp)
  );

  // low parallel unit: active vertex pipe + vertex pipeline
  pipe_fifo #(.T(vtx_tok_t), .DEPTH(PIPE_DEPTH)) u_vpipe (
    .clk, .rst_n,
    .in_valid(vtx_valid), .in_ready(vtx_ready), .in_data(vtx_tok),
    .out_valid(vq_valid), .out_ready(vq_ready), .out_data(vq_tok),
    .count(), .full_events(stats.vpipe_full)
  );

  vertex_pipeline #(.THREADS(VERTEX_THREADS)) u_vp (
    .clk, .rst_n, .iter_start, .level, .hub_degree,
    .in_valid(vq_valid), .in_ready(vq_ready), .in_tok(vq_tok),
    .mem_valid(m_valid[1]), .mem_ready(m_ready[1]), .mem_req(m_req[1]),
    .mem_rsp_valid(m_rsp_valid[1]), .mem_rsp_data(m_rsp_data),
    .bm_valid(b_valid[2]), .bm_ready(b_ready[2]), .bm_req(b_req[2]),
    .bm_rsp_valid(b_rsp_valid[2]), .bm_rsp(b_rsp),
    .done(vp_done), .hub_seen,
    .n_vertices(stats.vp_vertices), .n_edges(vp_edges), .n_loops(stats.vp_loops),
    .n_updates(stats.vp_updates), .n_multi(stats.vp_multi)
  );

  high_parallel_unit #(
    .MAX_BLOCKS(MAX_BLOCKS), .VPB(VPB), .SMALL_THREADS(SMALL_THREADS),
    .MIDDLE_THREADS(MIDDLE_THREADS), .LARGE_THREADS(LARGE_THREADS), .PIPE_DEPTH(PIPE_DEPTH)
  ) u_hp (
    .clk, .rst_n, .init(hp_init), .start(hp_start), .num_blocks, .num_vertices, .level,
    .done(hp_done), .busy(hp_busy),
    .mem_valid(m_valid[5:2]), .mem_ready(m_ready[5:2]), .mem_req(m_req[2:5]),
    .mem_rsp_valid(m_rsp_valid[5:2]), .mem_rsp_data(m_rsp_data),
    .bm_valid(b_valid[5:3]), .bm_ready(b_ready[5:3]), .bm_req(b_req[3:5]),
    .bm_rsp_valid(b_rsp_valid[5:3]), .bm_rsp(b_rsp),
    .nb, .na_b, .nl, .fl, .n_disp,
    .n_loops(g_loops), .n_edges(g_edges), .n_updates(g_upd), .n_halts(g_halts),
    .pipe_full(g_full)
  );

  always_comb begin
    for (int g = 0; g < 3; g++) begin
      stats.blk_disp[g]   = n_disp[g];
      stats.blk_loops[g]  = g_loops[g];
      stats.blk_edges[g]  = g_edges[g];
      stats.blk_upd[g]    = g_upd[g];
      stats.blk_halts[g]  = g_halts[g];
      stats.bpipe_full[g] = g_full[g];
    end
  end

endmodule
