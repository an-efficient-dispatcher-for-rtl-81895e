// edge_pipeline: one edge-block processing pipeline of the high parallel unit.
//
// In iterations where most of the graph is active the engine streams edges
// instead of chasing neighbours. The edges are grouped into edge-blocks: all
// edges whose destinations fall in one range of VPB consecutive vertices,
// stored contiguously in the edge-block edge list (ARR_ESRC / ARR_EDST).
// A pipeline takes block descriptors (block id, first edge, edge count) from
// its pipe and works through a block in loops of THREADS edges, like a
// work-group of THREADS work-items: a loop loads up to THREADS (src, dst)
// pairs into a register edge cache, then pulls each edge: a BM_PULL updates
// dst if src is in the current frontier and dst is unvisited, and an update
// writes depth level + 1 for dst to DDR. A block of c edges takes
// ceil(c / THREADS) loops.
//
// When the block is finished the pipeline reads the visited word holding
// the block's VPB destinations. The block stays active for later iterations
// only if one of them is still unvisited; it counts as accessed if it
// updated a vertex. Both go back to the edge-block dispatcher as a
// blk_res_t. A halt descriptor ends the iteration's stream and is counted
// but produces no result.
//
// The engine instantiates three pipelines: small blocks with 16 threads,
// middle blocks with 64 and large blocks with 256.
//
// Interface: desc_valid/desc_ready/desc from the pipe; res_valid/res_ready/res
// to the dispatcher; one data-analyzer and one bitmap-unit client. Timing per
// loop: 2n reads issued back to back, then one bitmap operation (and possibly
// one DDR write) per edge.
//
// From the reference design: edge-centric pull over edge-blocks of the same
// destination range, the three thread counts for middle (64) and large (256)
// blocks, the per-work-item register edge cache and the rule that a block
// with no active edge becomes inactive. The small pipeline's count is given
// as 1 thread in the text and as 16 threads in the workload-balance figure;
// 16 is used (it also matches the text's "less than 8 loops" for blocks
// under 64 edges). The load-then-pull sequencing is this design's own.
module edge_pipeline
  import graph_pkg::*;
#(
  parameter int   THREADS = 16,
  parameter int   VPB     = 8,
  parameter grp_e GROUP   = GRP_SMALL
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic [DEPTH_W-1:0] level,
  input  vid_t      num_vertices,
  // descriptor pipe
  input  logic      desc_valid,
  output logic      desc_ready,
  input  blk_desc_t desc,
  // results
  output logic      res_valid,
  input  logic      res_ready,
  output blk_res_t  res,
  // data analyzer client
  output logic      mem_valid,
  input  logic      mem_ready,
  output mem_req_t  mem_req,
  input  logic      mem_rsp_valid,
  input  word_t     mem_rsp_data,
  // bitmap client
  output logic      bm_valid,
  input  logic      bm_ready,
  output bm_req_t   bm_req,
  input  logic      bm_rsp_valid,
  input  bm_rsp_t   bm_rsp,
  // statistics
  output logic [31:0] n_blocks,
  output logic [31:0] n_edges,
  output logic [31:0] n_loops,
  output logic [31:0] n_updates,
  output logic [31:0] n_halts
);
  localparam int TW = $clog2(2*THREADS + 1);

  typedef enum logic [3:0] {S_IDLE, S_LOAD, S_FETCH, S_PULL, S_PWAIT, S_WRITE,
                            S_CHK, S_CWAIT, S_RES} state_e;
  state_e state;

  vid_t          blk, start, count, base, remain;
  vid_t          src_c [THREADS];   // edge cache, one entry per thread
  vid_t          dst_c [THREADS];
  logic [TW-1:0] n, iss, rcv, j;
  logic          accessed, active;
  vid_t          first_dst;

  assign remain    = count - base;
  assign first_dst = blk * vid_t'(VPB);
  assign desc_ready = (state == S_IDLE);

  always_comb begin
    mem_valid = 1'b0;
    mem_req   = '{arr: ARR_ESRC, we: 1'b0, idx: '0, wdata: '0};
    case (state)
      S_FETCH: if (iss < 2*n) begin
        mem_valid   = 1'b1;
        mem_req.arr = iss[0] ? ARR_EDST : ARR_ESRC;
        mem_req.idx = start + base + vid_t'(iss >> 1);
      end
      S_WRITE: begin
        mem_valid     = 1'b1;
        mem_req.arr   = ARR_DEPTH;
        mem_req.we    = 1'b1;
        mem_req.idx   = dst_c[j];
        mem_req.wdata = word_t'(level + 1'b1);
      end
      default: ;
    endcase
  end

  always_comb begin
    bm_valid = (state == S_PULL) || (state == S_CHK);
    if (state == S_CHK) bm_req = '{op: BM_READ, a: first_dst >> 5, b: '0};
    else                bm_req = '{op: BM_PULL, a: src_c[j], b: dst_c[j]};
  end

  // a block stays active while one of its destinations is unvisited
  logic still_active;
  always_comb begin
    still_active = 1'b0;
    for (int k = 0; k < VPB; k++) begin
      vid_t vk;
      vk = first_dst + vid_t'(k);
      if (vk < num_vertices && !bm_rsp.vis[vk[4:0]]) still_active = 1'b1;
    end
  end

  assign res_valid = (state == S_RES);
  assign res       = '{blk: blk, grp: GROUP, active: active, accessed: accessed};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      blk <= '0; start <= '0; count <= '0; base <= '0;
      n <= '0; iss <= '0; rcv <= '0; j <= '0;
      accessed <= 1'b0; active <= 1'b0;
      n_blocks <= '0; n_edges <= '0; n_loops <= '0; n_updates <= '0; n_halts <= '0;
      for (int t = 0; t < THREADS; t++) begin
        src_c[t] <= '0;
        dst_c[t] <= '0;
      end
    end else begin
      case (state)
        S_IDLE: if (desc_valid) begin
          if (desc.halt) n_halts <= n_halts + 1;
          else begin
            blk      <= desc.blk;
            start    <= desc.start;
            count    <= desc.count;
            base     <= '0;
            accessed <= 1'b0;
            n_blocks <= n_blocks + 1;
            state    <= S_LOAD;
          end
        end
        S_LOAD: begin
          if (remain == 0) state <= S_CHK;
          else begin
            n     <= (remain > vid_t'(THREADS)) ? TW'(THREADS) : TW'(remain);
            iss   <= '0;
            rcv   <= '0;
            state <= S_FETCH;
            n_loops <= n_loops + 1;
          end
        end
        S_FETCH: begin
          if (mem_valid && mem_ready) iss <= iss + 1'b1;
          if (mem_rsp_valid) begin
            if (rcv[0]) dst_c[rcv >> 1] <= mem_rsp_data;
            else        src_c[rcv >> 1] <= mem_rsp_data;
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 == 2*n) begin
              j     <= '0;
              state <= S_PULL;
            end
          end
        end
        S_PULL: if (bm_ready) state <= S_PWAIT;
        S_PWAIT: if (bm_rsp_valid) begin
          n_edges <= n_edges + 1;
          if (bm_rsp.updated) begin
            n_updates <= n_updates + 1;
            accessed  <= 1'b1;
            state     <= S_WRITE;
          end else if (j + 1'b1 == n) begin
            base  <= base + vid_t'(n);
            state <= S_LOAD;
          end else begin
            j     <= j + 1'b1;
            state <= S_PULL;
          end
        end
        S_WRITE: if (mem_ready) begin
          if (j + 1'b1 == n) begin
            base  <= base + vid_t'(n);
            state <= S_LOAD;
          end else begin
            j     <= j + 1'b1;
            state <= S_PULL;
          end
        end
        S_CHK: if (bm_ready) state <= S_CWAIT;
        S_CWAIT: if (bm_rsp_valid) begin
          active <= still_active;
          state  <= S_RES;
        end
        S_RES: if (res_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // VPB destinations of a block must lie in one bitmap word
  initial assert (VPB >= 1 && VPB <= 32 && (32 % VPB) == 0);

endmodule
