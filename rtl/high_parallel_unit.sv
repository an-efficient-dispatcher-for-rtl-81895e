// high_parallel_unit: edge-centric processing of the high-parallelism stage.
//
// Groups the edge-block dispatcher, one pipe per block class and the three
// processing pipelines (small: SMALL_THREADS threads, middle: MIDDLE_THREADS,
// large: LARGE_THREADS). On start the dispatcher streams the active blocks
// into the pipes while the pipelines already drain them, so dispatching and
// processing overlap; done pulses when every block has been processed.
//
// Interface: four data-analyzer clients (index 0: dispatcher, 1..3: small,
// middle, large pipeline) and three bitmap-unit clients (0..2: small,
// middle, large), flattened as arrays; the iteration's statistics for the
// switch rule; per-group counters. Read responses arrive as a one-hot
// valid per client with shared data.
//
// From the reference design: this composition and the pipes between the
// edge-block dispatcher and the pipelines. PIPE_DEPTH is this design's choice.
module high_parallel_unit
  import graph_pkg::*;
#(
  parameter int MAX_BLOCKS     = 1 << 20,
  parameter int VPB            = 8,
  parameter int SMALL_THREADS  = 16,
  parameter int MIDDLE_THREADS = 64,
  parameter int LARGE_THREADS  = 256,
  parameter int PIPE_DEPTH     = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     init,
  input  logic     start,
  input  vid_t     num_blocks,
  input  vid_t     num_vertices,
  input  logic [DEPTH_W-1:0] level,
  output logic     busy,
  output logic     done,
  // data analyzer clients
  output logic     [3:0] mem_valid,
  input  logic     [3:0] mem_ready,
  output mem_req_t mem_req [4],
  input  logic     [3:0] mem_rsp_valid,
  input  word_t    mem_rsp_data,
  // bitmap clients
  output logic     [2:0] bm_valid,
  input  logic     [2:0] bm_ready,
  output bm_req_t  bm_req [3],
  input  logic     [2:0] bm_rsp_valid,
  input  bm_rsp_t  bm_rsp,
  // statistics
  output vid_t     nb,
  output vid_t     na_b,
  output vid_t     nl,
  output vid_t     fl,
  output vid_t     n_disp [3],
  output logic [31:0] n_loops [3],
  output logic [31:0] n_edges [3],
  output logic [31:0] n_updates [3],
  output logic [31:0] n_halts [3],
  output logic [31:0] pipe_full [3]
);
  logic      [2:0] d_valid, d_ready;
  blk_desc_t d_desc;
  logic      [2:0] p_valid, p_ready;
  blk_desc_t p_desc [3];
  logic      [2:0] r_valid, r_ready;
  blk_res_t  r_res [3];

  edge_block_dispatcher #(.MAX_BLOCKS(MAX_BLOCKS)) u_ebd (
    .clk, .rst_n, .init, .start, .num_blocks, .busy, .done,
    .mem_valid(mem_valid[0]), .mem_ready(mem_ready[0]), .mem_req(mem_req[0]),
    .mem_rsp_valid(mem_rsp_valid[0]), .mem_rsp_data,
    .out_valid(d_valid), .out_ready(d_ready), .out_desc(d_desc),
    .res_valid(r_valid), .res_ready(r_ready), .res(r_res),
    .nb, .na_b, .nl, .fl, .n_disp
  );

  localparam int THR [3] = '{SMALL_THREADS, MIDDLE_THREADS, LARGE_THREADS};
  localparam grp_e GRP [3] = '{GRP_SMALL, GRP_MIDDLE, GRP_LARGE};

  for (genvar g = 0; g < 3; g++) begin : g_grp
    pipe_fifo #(.T(blk_desc_t), .DEPTH(PIPE_DEPTH)) u_pipe (
      .clk, .rst_n,
      .in_valid(d_valid[g]), .in_ready(d_ready[g]), .in_data(d_desc),
      .out_valid(p_valid[g]), .out_ready(p_ready[g]), .out_data(p_desc[g]),
      .count(), .full_events(pipe_full[g])
    );

    edge_pipeline #(.THREADS(THR[g]), .VPB(VPB), .GROUP(GRP[g])) u_pipe_line (
      .clk, .rst_n, .level, .num_vertices,
      .desc_valid(p_valid[g]), .desc_ready(p_ready[g]), .desc(p_desc[g]),
      .res_valid(r_valid[g]), .res_ready(r_ready[g]), .res(r_res[g]),
      .mem_valid(mem_valid[g+1]), .mem_ready(mem_ready[g+1]), .mem_req(mem_req[g+1]),
      .mem_rsp_valid(mem_rsp_valid[g+1]), .mem_rsp_data,
      .bm_valid(bm_valid[g]), .bm_ready(bm_ready[g]), .bm_req(bm_req[g]),
      .bm_rsp_valid(bm_rsp_valid[g]), .bm_rsp,
      .n_blocks(), .n_edges(n_edges[g]), .n_loops(n_loops[g]),
      .n_updates(n_updates[g]), .n_halts(n_halts[g])
    );
  end

endmodule
