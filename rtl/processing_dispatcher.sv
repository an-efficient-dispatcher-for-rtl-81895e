// processing_dispatcher: the run-time controller of the dual-module engine.
//
// It runs a level-synchronous BFS from root and decides, iteration by
// iteration, which processing module does the work:
//
//   1. Initialise: clear the bitmap words covering num_vertices, mark root
//      visited and in the current frontier, write depth 0 for root, and have
//      the edge-block dispatcher mark every block active. The first
//      iteration runs in the high unit when start_high is set (the whole
//      graph is active from the start), otherwise in the low unit.
//   2. Low-unit iteration: walk the current-frontier bitmap and send each
//      active vertex through the pipe to the vertex pipeline (the active
//      vertex array), then a halt token; wait for the pipeline's done.
//      High-unit iteration: start the edge-block dispatcher and wait for done.
//   3. Let the state analyzer count Na and Ni (and retire the old frontier),
//      feed the statistics to the switch rule, swap the frontier banks and
//      advance the level.
//   4. Stop when no vertex is active for the next iteration.
//
// Interface: start/busy/done with the run's configuration; one bitmap-unit
// client and one data-analyzer client (root depth write); the active vertex
// stream (valid/ready, vtx_tok_t) toward the pipe; control pulses and status
// to/from the vertex pipeline, the high parallel unit and the state
// analyzer; counters of low and high iterations and of switch events.
//
// From the reference design: the monitoring of the run-time state, the
// dispatch of active vertices to the low unit and of blocks to the high unit,
// the switch rule (in switch_policy), finishing the current iteration in the
// low unit after a switch is decided, and starting in the high unit when the
// whole graph is active. The step sequence and handshakes are this design's.
module processing_dispatcher
  import graph_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // run control and configuration
  input  logic     start,
  input  vid_t     root,
  input  vid_t     num_vertices,
  input  logic     start_high,
  input  logic [TUNE_W-1:0] alpha,
  input  logic [TUNE_W-1:0] beta,
  input  logic [TUNE_W-1:0] gamma,
  output logic     busy,
  output logic     done,
  output mode_e    mode,
  output logic [DEPTH_W-1:0] level,
  // bitmap client
  output logic     bm_valid,
  input  logic     bm_ready,
  output bm_req_t  bm_req,
  input  logic     bm_rsp_valid,
  input  bm_rsp_t  bm_rsp,
  output logic     bm_swap,
  // data analyzer client (write only)
  output logic     mem_valid,
  input  logic     mem_ready,
  output mem_req_t mem_req,
  // low unit
  output logic     iter_start,
  output logic     vtx_valid,
  input  logic     vtx_ready,
  output vtx_tok_t vtx_tok,
  input  logic     vp_done,
  input  logic     hub_seen,
  // high unit
  output logic     hp_init,
  output logic     hp_start,
  input  logic     hp_busy,
  input  logic     hp_done,
  input  vid_t     na_b,
  input  vid_t     nb,
  input  vid_t     fl,
  input  vid_t     nl,
  // state analyzer
  output logic     sa_start,
  input  logic     sa_done,
  input  vid_t     na_v,
  input  vid_t     ni_v,
  // statistics
  output logic [31:0] n_iter_low,
  output logic [31:0] n_iter_high,
  output logic [31:0] n_ev_hub,
  output logic [31:0] n_ev_alpha,
  output logic [31:0] n_ev_now,
  output logic [31:0] n_ev_defer,
  output logic [31:0] n_ev_deferred
);
  typedef enum logic [4:0] {S_IDLE, S_CLR, S_ROOT, S_BWAIT, S_RDEPTH, S_HPINIT, S_HPWAIT,
                            S_ITER, S_LSCAN, S_LRSP, S_LEMIT, S_LHALT, S_LWAIT, S_HWAIT,
                            S_AWAIT, S_DECIDE, S_NEXT} state_e;
  state_e state, after_bw;

  vid_t  w, nwords;
  word_t bits;
  logic  [4:0] lsb;
  logic  pol_init, pol_eval;
  logic  ev_hub, ev_alpha, ev_now, ev_defer, ev_deferred, pending;

  assign nwords = (num_vertices + 31) >> 5;
  assign busy   = (state != S_IDLE);

  switch_policy u_policy (
    .clk, .rst_n, .init(pol_init), .init_mode(start_high ? MODE_HIGH : MODE_LOW),
    .eval(pol_eval), .alpha, .beta, .gamma,
    .hub_seen, .na_v, .ni_v, .na_b, .nb, .fl, .nl,
    .mode, .pending, .ev_hub, .ev_alpha, .ev_now, .ev_defer, .ev_deferred
  );

  // lowest set bit of the frontier word being emitted
  always_comb begin
    lsb = '0;
    for (int k = 31; k >= 0; k--) if (bits[k]) lsb = 5'(k);
  end

  always_comb begin
    bm_valid = 1'b0;
    bm_req   = '{op: BM_READ, a: w, b: root};
    case (state)
      S_CLR:   begin bm_valid = 1'b1; bm_req.op = BM_CLEAR; end
      S_ROOT:  begin bm_valid = 1'b1; bm_req.op = BM_ROOT;  end
      S_LSCAN: begin bm_valid = 1'b1; bm_req.op = BM_READ;  end
      default: ;
    endcase
  end

  assign mem_valid = (state == S_RDEPTH);
  assign mem_req   = '{arr: ARR_DEPTH, we: 1'b1, idx: root, wdata: '0};

  assign vtx_valid = (state == S_LEMIT && bits != 0) || (state == S_LHALT);
  assign vtx_tok   = '{halt: (state == S_LHALT), v: {w[26:0], lsb}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; after_bw <= S_IDLE;
      w <= '0; bits <= '0; level <= '0; done <= 1'b0;
      pol_init <= 1'b0; pol_eval <= 1'b0; bm_swap <= 1'b0;
      iter_start <= 1'b0; hp_init <= 1'b0; hp_start <= 1'b0; sa_start <= 1'b0;
      n_iter_low <= '0; n_iter_high <= '0;
      n_ev_hub <= '0; n_ev_alpha <= '0; n_ev_now <= '0; n_ev_defer <= '0; n_ev_deferred <= '0;
    end else begin
      done <= 1'b0; pol_init <= 1'b0; pol_eval <= 1'b0; bm_swap <= 1'b0;
      iter_start <= 1'b0; hp_init <= 1'b0; hp_start <= 1'b0; sa_start <= 1'b0;
      if (ev_hub)      n_ev_hub      <= n_ev_hub + 1;
      if (ev_alpha)    n_ev_alpha    <= n_ev_alpha + 1;
      if (ev_now)      n_ev_now      <= n_ev_now + 1;
      if (ev_defer)    n_ev_defer    <= n_ev_defer + 1;
      if (ev_deferred) n_ev_deferred <= n_ev_deferred + 1;
      case (state)
        S_IDLE: if (start) begin
          w <= '0;
          n_iter_low <= '0; n_iter_high <= '0;
          n_ev_hub <= '0; n_ev_alpha <= '0; n_ev_now <= '0; n_ev_defer <= '0; n_ev_deferred <= '0;
          state <= S_CLR;
        end
        S_CLR: if (bm_ready) begin
          w        <= w + 1;
          after_bw <= (w + 1 >= nwords) ? S_ROOT : S_CLR;
          state    <= S_BWAIT;
        end
        S_ROOT: if (bm_ready) begin
          after_bw <= S_RDEPTH;
          state    <= S_BWAIT;
        end
        S_BWAIT: if (bm_rsp_valid) state <= after_bw;
        S_RDEPTH: if (mem_ready) begin
          hp_init  <= 1'b1;
          pol_init <= 1'b1;   // mode is valid well before the first S_ITER
          state    <= S_HPINIT;
        end
        S_HPINIT: state <= S_HPWAIT;   // let the high unit register hp_init
        S_HPWAIT: if (!hp_busy) begin
          level    <= '0;
          state    <= S_ITER;
        end
        S_ITER: begin
          iter_start <= 1'b1;
          if (mode == MODE_LOW) begin
            n_iter_low <= n_iter_low + 1;
            w     <= '0;
            state <= S_LSCAN;
          end else begin
            n_iter_high <= n_iter_high + 1;
            hp_start <= 1'b1;
            state    <= S_HWAIT;
          end
        end
        S_LSCAN: if (bm_ready) state <= S_LRSP;
        S_LRSP: if (bm_rsp_valid) begin
          bits  <= bm_rsp.cur;
          state <= S_LEMIT;
        end
        S_LEMIT: begin
          // emit one active vertex per cycle, lowest index first
          if (bits != 0) begin
            if (vtx_ready) bits[lsb] <= 1'b0;
          end else begin
            w     <= w + 1;
            state <= (w + 1 >= nwords) ? S_LHALT : S_LSCAN;
          end
        end
        S_LHALT: if (vtx_ready) state <= S_LWAIT;
        S_LWAIT: if (vp_done) begin
          sa_start <= 1'b1;
          state    <= S_AWAIT;
        end
        S_HWAIT: if (hp_done) begin
          sa_start <= 1'b1;
          state    <= S_AWAIT;
        end
        S_AWAIT: if (sa_done) begin
          pol_eval <= 1'b1;
          bm_swap  <= 1'b1;
          state    <= S_DECIDE;
        end
        S_DECIDE: begin
          // switch_policy updates mode in this cycle
          level <= level + 1'b1;
          state <= S_NEXT;
        end
        S_NEXT: begin
          if (na_v == 0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_ITER;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
