// vertex_pipeline: the low parallel unit's vertex-centric push engine.
//
// In iterations with few active vertices the engine works vertex by vertex
// on the CSR arrays. Active vertices arrive through a pipe from the
// dispatcher; each is handled by one thread group of THREADS threads. The
// group reads the vertex's two CSR index entries (first and one-past-last
// neighbour), then walks its neighbour list in loops of up to THREADS
// neighbours: a loop first loads its neighbours into the group's CSR array
// cache (THREADS registers), then pushes the new level to each one. A push
// is a BM_PUSH on the bitmap unit; if it claims an unvisited vertex, the
// new depth (level + 1) is written to the DEPTH array in DDR. A vertex with
// degree d therefore takes ceil(d / THREADS) loops.
//
// A vertex whose degree is at least hub_degree (when non-zero) is a hub:
// hub_seen is raised and held until iter_start, which tells the dispatcher
// to move to the high parallel unit after this iteration.
//
// The stream ends with a halt token; after it the unit pulses done.
//
// Interface: in_valid/in_ready/in_tok from the pipe; one data-analyzer
// client (mem_*) and one bitmap-unit client (bm_*); counters of vertices,
// edges, loops and updates. Timing: 3 DDR reads per vertex plus, per loop,
// up to THREADS reads issued back to back, then one bitmap operation (and
// possibly one write) per neighbour.
//
// From the reference design: push-style vertex-centric processing on CSR,
// a 16-thread group per active vertex that loops when the degree exceeds 16,
// the array cache between pipe and pipeline, and the hub trigger. The
// sequencing (load, then push one neighbour at a time) is this design's own.
module vertex_pipeline
  import graph_pkg::*;
#(
  parameter int THREADS = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     iter_start,
  input  logic [DEPTH_W-1:0] level,
  input  vid_t     hub_degree,
  // active vertex pipe
  input  logic     in_valid,
  output logic     in_ready,
  input  vtx_tok_t in_tok,
  // data analyzer client
  output logic     mem_valid,
  input  logic     mem_ready,
  output mem_req_t mem_req,
  input  logic     mem_rsp_valid,
  input  word_t    mem_rsp_data,
  // bitmap client
  output logic     bm_valid,
  input  logic     bm_ready,
  output bm_req_t  bm_req,
  input  logic     bm_rsp_valid,
  input  bm_rsp_t  bm_rsp,
  // status
  output logic     done,
  output logic     hub_seen,
  output logic [31:0] n_vertices,
  output logic [31:0] n_edges,
  output logic [31:0] n_loops,
  output logic [31:0] n_updates,
  output logic [31:0] n_multi      // vertices that needed more than one loop
);
  localparam int TW = $clog2(THREADS + 1);

  typedef enum logic [2:0] {S_IDLE, S_OFF, S_FETCH, S_LOAD, S_PUSH, S_PWAIT, S_WRITE} state_e;
  state_e state;

  vid_t          v, off0, off1, base;
  vid_t          cache [THREADS];    // CSR array cache of the thread group
  logic [TW-1:0] n, iss, rcv, j;
  vid_t          deg, remain;

  assign deg    = off1 - off0;
  assign remain = deg - base;
  assign in_ready = (state == S_IDLE);

  always_comb begin
    mem_valid = 1'b0;
    mem_req   = '{arr: ARR_OFFSET, we: 1'b0, idx: '0, wdata: '0};
    case (state)
      S_OFF: if (iss < 2) begin
        mem_valid   = 1'b1;
        mem_req.idx = v + vid_t'(iss);
      end
      S_FETCH: if (iss < n) begin
        mem_valid   = 1'b1;
        mem_req.arr = ARR_NEIGH;
        mem_req.idx = off0 + base + vid_t'(iss);
      end
      S_WRITE: begin
        mem_valid     = 1'b1;
        mem_req.arr   = ARR_DEPTH;
        mem_req.we    = 1'b1;
        mem_req.idx   = cache[j];
        mem_req.wdata = word_t'(level + 1'b1);
      end
      default: ;
    endcase
  end

  assign bm_valid = (state == S_PUSH);
  assign bm_req   = '{op: BM_PUSH, a: v, b: cache[j]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      v <= '0; off0 <= '0; off1 <= '0; base <= '0;
      n <= '0; iss <= '0; rcv <= '0; j <= '0;
      done <= 1'b0; hub_seen <= 1'b0;
      n_vertices <= '0; n_edges <= '0; n_loops <= '0; n_updates <= '0; n_multi <= '0;
      for (int t = 0; t < THREADS; t++) cache[t] <= '0;
    end else begin
      done <= 1'b0;
      if (iter_start) hub_seen <= 1'b0;
      case (state)
        S_IDLE: if (in_valid) begin
          if (in_tok.halt) begin
            done <= 1'b1;
          end else begin
            v     <= in_tok.v;
            iss   <= '0;
            rcv   <= '0;
            state <= S_OFF;
            n_vertices <= n_vertices + 1;
          end
        end
        S_OFF: begin
          if (mem_valid && mem_ready) iss <= iss + 1'b1;
          if (mem_rsp_valid) begin
            rcv <= rcv + 1'b1;
            if (rcv == 0) off0 <= mem_rsp_data;
            else begin
              off1  <= mem_rsp_data;
              base  <= '0;
              state <= S_LOAD;  // S_LOAD with rcv==n==0 starts the first loop
              n     <= '0;
              iss   <= '0;
              rcv   <= '0;
            end
          end
        end
        S_LOAD: begin
          // start of a loop: size it, or finish the vertex
          if (base == 0 && hub_degree != 0 && deg >= hub_degree) hub_seen <= 1'b1;
          if (base == 0 && deg > vid_t'(THREADS)) n_multi <= n_multi + 1;
          if (remain == 0) state <= S_IDLE;
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
            cache[rcv] <= mem_rsp_data;
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 == n) begin
              j     <= '0;
              state <= S_PUSH;
            end
          end
        end
        S_PUSH: if (bm_ready) state <= S_PWAIT;
        S_PWAIT: if (bm_rsp_valid) begin
          n_edges <= n_edges + 1;
          if (bm_rsp.updated) begin
            n_updates <= n_updates + 1;
            state <= S_WRITE;
          end else if (j + 1'b1 == n) begin
            base  <= base + vid_t'(n);
            state <= S_LOAD;
          end else begin
            j     <= j + 1'b1;
            state <= S_PUSH;
          end
        end
        S_WRITE: if (mem_ready) begin
          if (j + 1'b1 == n) begin
            base  <= base + vid_t'(n);
            state <= S_LOAD;
          end else begin
            j     <= j + 1'b1;
            state <= S_PUSH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (state == S_FETCH) |-> n <= THREADS);

endmodule
